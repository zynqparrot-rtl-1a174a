// pshell_tb: the shell in the configuration its overview drawing shows (one
// host-to-DUT FIFO, one DUT-to-host FIFO, two output and two input CSRs),
// with a switchable loopback in the DUT clock domain. Checks CSR write/read,
// CSR delivery and update pulses into the DUT domain, input CSR readback,
// count registers, dropping of a write to a full FIFO, zero on reading an
// empty FIFO, FIFO order through the loopback, unmapped reads, and that every
// AXI access completes within a bound even while the DUT side is stalled.
module pshell_tb;
  import zp_pkg::*;
  logic aclk = 0, aresetn = 0, dclk = 0, drst = 1;
  axil_req_t req = '0;
  axil_rsp_t rsp;
  logic [1:0][31:0] csr_out, csr_in;
  logic [1:0]       csr_out_upd;
  logic [0:0][31:0] p2d_data, d2p_data;
  logic [0:0]       p2d_valid, p2d_yumi, d2p_push, d2p_full;
  bit loop_en = 0;
  int checks = 0, failures = 0, upd_pulses = 0;

  always #5 aclk = ~aclk;
  always #3 dclk = ~dclk;

  pshell #(.NUM_P2D(1), .NUM_D2P(1), .NUM_CSR_OUT(2), .NUM_CSR_IN(2), .FIFO_DEPTH(16)) dut (
    .aclk, .aresetn, .s_axi_req(req), .s_axi_rsp(rsp),
    .dclk, .drst, .csr_out, .csr_out_upd, .csr_in,
    .p2d_data, .p2d_valid, .p2d_yumi, .d2p_data, .d2p_push, .d2p_full);

  // DUT-domain loopback and input CSR sources
  assign p2d_yumi[0] = loop_en && p2d_valid[0] && !d2p_full[0];
  assign d2p_push[0] = p2d_yumi[0];
  assign d2p_data[0] = p2d_data[0] ^ 32'h5a5a_0000;
  assign csr_in[0]   = csr_out[0] + 32'd1;
  assign csr_in[1]   = ~csr_out[1];
  always @(posedge dclk) if (!drst && csr_out_upd[0]) upd_pulses++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    int n = 0;
    bit awd = 0, wd = 0;
    @(negedge aclk);
    req.awaddr = a; req.awvalid = 1; req.wdata = d; req.wvalid = 1; req.wstrb = 4'hF; req.bready = 1;
    while (!(awd && wd)) begin
      @(posedge aclk);
      if (rsp.awready) awd = 1;
      if (rsp.wready)  wd  = 1;
      #1;
      if (awd) req.awvalid = 0;
      if (wd)  req.wvalid  = 0;
    end
    do begin @(posedge aclk); n++; end while (!rsp.bvalid && n < 100);
    #1 req.bready = 0;
    check(n < 100, $sformatf("write to %h completes", a));
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    int n = 0;
    @(negedge aclk);
    req.araddr = a; req.arvalid = 1; req.rready = 1;
    do @(posedge aclk); while (!rsp.arready);
    #1 req.arvalid = 0;
    do begin @(posedge aclk); n++; end while (!rsp.rvalid && n < 100);
    d = rsp.rdata;
    #1 req.rready = 0;
    check(n < 100, $sformatf("read of %h completes", a));
  endtask

  localparam logic [31:0] A_P2D = 32'h00, A_P2D_CNT = 32'h04, A_D2P = 32'h08, A_D2P_CNT = 32'h0C,
                          A_CSR0 = 32'h10, A_CSR1 = 32'h14, A_IN0 = 32'h18, A_IN1 = 32'h1C;

  initial begin
    logic [31:0] v;
    repeat (4) @(posedge aclk);
    aresetn = 1; drst = 0;
    repeat (4) @(posedge aclk);

    // CSRs
    axi_write(A_CSR0, 32'h0000_beef);
    axi_read(A_CSR0, v);  check(v == 32'h0000_beef, "CSR 0 readback");
    axi_write(A_CSR1, 32'h1234_5678);
    axi_read(A_CSR1, v);  check(v == 32'h1234_5678, "CSR 1 readback");
    repeat (20) @(posedge aclk);
    check(csr_out[0] == 32'h0000_beef && csr_out[1] == 32'h1234_5678, "CSRs reach DUT domain");
    check(upd_pulses == 1, "one update pulse for one write");
    axi_read(A_IN0, v);  check(v == 32'h0000_bef0, "input CSR 0");
    axi_read(A_IN1, v);  check(v == ~32'h1234_5678, "input CSR 1");
    axi_write(A_CSR0, 32'h7);
    repeat (20) @(posedge aclk);
    axi_read(A_IN0, v);  check(v == 32'h8, "input CSR 0 follows a new write");

    // counts and non-blocking rules with the DUT side stalled
    axi_read(A_P2D_CNT, v); check(v == 16, "host-to-DUT credits after reset");
    axi_read(A_D2P_CNT, v); check(v == 0, "DUT-to-host occupancy after reset");
    axi_read(A_D2P, v);     check(v == 0, "read of empty FIFO returns 0");
    for (int i = 0; i < 17; i++) axi_write(A_P2D, 32'(i + 100));
    axi_read(A_P2D_CNT, v); check(v == 0, "no credits when full");
    repeat (10) @(posedge aclk);
    // loop back
    loop_en = 1;
    repeat (60) @(posedge aclk);
    axi_read(A_P2D_CNT, v); check(v == 16, "credits return after drain");
    axi_read(A_D2P_CNT, v); check(v == 16, "16 words looped back (17th dropped)");
    for (int i = 0; i < 16; i++) begin
      axi_read(A_D2P, v);
      check(v == (32'(i + 100) ^ 32'h5a5a_0000), $sformatf("loopback word %0d = %h", i, v));
    end
    axi_read(A_D2P, v);     check(v == 0, "empty again");
    axi_read(32'h0000_0FF0, v); check(v == 0, "unmapped read");
    axi_write(A_D2P_CNT, 32'hffff_ffff);  // write to a read-only word: ignored, still answered
    axi_read(A_D2P_CNT, v); check(v == 0, "read-only word unchanged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
