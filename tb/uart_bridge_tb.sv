// uart_bridge_tb: sends random write and read commands as bytes through a
// behavioural UART, with a small word-addressed memory as the GP0 slave.
// Every write must land in the memory with the right address and data, every
// read must come back as four bytes equal to the memory word, writes must
// send nothing back, and the GP0 master must never have more than one access
// in flight.
module uart_bridge_tb;
  import zp_pkg::*;
  logic clk = 0, rst = 1;
  axil_req_t m_uart_req, m_gp0_req;
  axil_rsp_t m_uart_rsp, m_gp0_rsp;
  int checks = 0, failures = 0, gp0_writes = 0, gp0_reads = 0;
  logic [31:0] mem [64];
  logic [31:0] model [64];

  always #5 clk = ~clk;

  uart_bridge #(.UART_BASE(32'h0000_1000)) dut (.*);
  uart16550_model #(.BASE(32'h0000_1000)) u_uart (.clk, .rst, .req(m_uart_req), .rsp(m_uart_rsp));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // GP0 slave: memory, answers after the address (and data) handshakes
  bit aw_s = 0, w_s = 0, ar_s = 0;
  logic [31:0] aw_a, w_d, ar_a;
  always_comb begin
    m_gp0_rsp = '0;
    m_gp0_rsp.awready = !aw_s;
    m_gp0_rsp.wready  = !w_s;
    m_gp0_rsp.arready = !ar_s;
    m_gp0_rsp.bvalid  = aw_s && w_s;
    m_gp0_rsp.rvalid  = ar_s;
    m_gp0_rsp.rdata   = mem[ar_a[7:2]];
  end
  always @(posedge clk) if (!rst) begin
    if (m_gp0_req.awvalid && !aw_s) begin aw_s <= 1; aw_a <= m_gp0_req.awaddr; end
    if (m_gp0_req.wvalid && !w_s)   begin w_s  <= 1; w_d  <= m_gp0_req.wdata;  end
    if (aw_s && w_s && m_gp0_req.bready) begin
      mem[aw_a[7:2]] <= w_d; aw_s <= 0; w_s <= 0; gp0_writes++;
    end
    if (m_gp0_req.arvalid && !ar_s) begin ar_s <= 1; ar_a <= m_gp0_req.araddr; end
    if (ar_s && m_gp0_req.rready) begin ar_s <= 0; gp0_reads++; end
    check(!((aw_s || w_s) && ar_s), "one GP0 access at a time");
  end

  task automatic send_write(logic [31:0] a, logic [31:0] d);
    u_uart.send_byte(8'h01);
    for (int i = 0; i < 4; i++) u_uart.send_byte(a[8*i +: 8]);
    for (int i = 0; i < 4; i++) u_uart.send_byte(d[8*i +: 8]);
  endtask

  task automatic send_read(logic [31:0] a);
    u_uart.send_byte(8'h00);
    for (int i = 0; i < 4; i++) u_uart.send_byte(a[8*i +: 8]);
  endtask

  initial begin
    for (int i = 0; i < 64; i++) begin mem[i] = '0; model[i] = '0; end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 40; n++) begin
      logic [5:0] idx;
      idx = 6'($urandom);
      if ($urandom % 2 == 0) begin
        logic [31:0] d;
        int w0;
        d = $urandom;
        model[idx] = d;
        w0 = gp0_writes;
        send_write({24'h0, idx, 2'b00}, d);
        while (gp0_writes == w0) @(posedge clk);
        repeat (50) @(posedge clk);
        check(mem[idx] == d, $sformatf("write %0d: mem[%0d]=%h expected %h", n, idx, mem[idx], d));
        check(u_uart.tx_q.size() == 0, "a write sends nothing back");
      end else begin
        logic [31:0] got;
        int k = 0;
        send_read({24'h0, idx, 2'b00});
        while (u_uart.tx_q.size() < 4 && k < 5000) begin @(posedge clk); k++; end
        check(k < 5000, "read answered");
        got = '0;
        for (int i = 0; i < 4 && u_uart.tx_q.size() > 0; i++) got[8*i +: 8] = u_uart.tx_q.pop_front();
        check(got == model[idx], $sformatf("read %0d: %h expected %h", n, got, model[idx]));
      end
    end
    check(gp0_reads > 0 && gp0_writes > 0, "both kinds of command seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
