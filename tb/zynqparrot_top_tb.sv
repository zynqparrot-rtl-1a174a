// zynqparrot_top_tb: end-to-end co-emulation of a small behavioural DUT with
// the shell at its default parameters.
//
// The DUT, clocked by the gated clock, runs N cycles. Each cycle it shows a
// PC and an event class that are functions of its cycle number; every other
// cycle it emits a word on the user output; periodically it issues a memory
// request and waits for the answer; it consumes words the host sends; it
// toggles coverage selects. The host side, modelled with GP0 accesses on the
// shell clock, drains the FIFOs slowly (so the DUT must be gated), answers
// memory requests with a latency derived from the request, sometimes giving
// the response before the latency and sometimes long after, and collects the
// profiler's samples. At the end it stops the DUT and checks the stall
// counters, cycle counters, coverage words and user CSRs, then switches the
// GP0 source to the UART bridge and reads a register over serial.
//
// Checks: every memory response arrives exactly its latency after its
// request (in DUT cycles); every output word and every sample arrives in
// order and intact; counters equal the DUT-side tallies; each mechanism
// (FIFO-full gating, latency wait, early and late responses, profiler
// gating, software stop, UART mode) happened at least once.
module zynqparrot_top_tb;
  import zp_pkg::*;
  localparam int N         = 2000;
  localparam int SI        = 10;
  localparam int NUM_COVER = 3284;
  localparam int PC_W      = 39;

  logic aclk = 0, aresetn = 0, dut_clk = 0, dut_rst = 1, use_uart = 0;
  axil_req_t s_axi_req = '0, m_uart_req;
  axil_rsp_t s_axi_rsp, m_uart_rsp;
  logic dut_gclk, dut_clk_en;
  logic [31:0] dut_in_data, dut_out_data, dut_mem_req_data, dut_mem_resp_data;
  logic dut_in_v, dut_in_yumi, dut_out_v, dut_out_ready;
  logic dut_mem_req_v, dut_mem_req_ready, dut_mem_resp_v;
  logic [PC_W-1:0] dut_pc;
  perf_event_e dut_event;
  logic [NUM_COVER-1:0] dut_cov_sel = '0;
  logic [1:0][31:0] dut_csr_o, dut_csr_i;

  int checks = 0, failures = 0;

  always #5 aclk = ~aclk;
  always #4 dut_clk = ~dut_clk;

  zynqparrot_top dut (.*);
  uart16550_model #(.BASE(32'h0000_1000)) u_uart (.clk(aclk), .rst(!aresetn), .req(m_uart_req), .rsp(m_uart_rsp));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int lat_of(logic [31:0] a);
    return 3 + int'(a % 11);
  endfunction
  function automatic perf_event_e ev_of(int c);
    return perf_event_e'((c * 7 + c / 3) % 8);
  endfunction
  function automatic logic [PC_W-1:0] pc_of(int c);
    return PC_W'(64'h80_0000_0000 + 64'(4 * c));
  endfunction

  // ------------------------------------------------------------ the DUT
  int dcyc = 0, req_cyc = 0, resp_seen = 0, in_seen = 0;
  logic [31:0] req_word = '0;
  bit waiting = 0;
  int ev_tally [NUM_EVENTS];
  logic [NUM_COVER-1:0] cov_model = '0;

  assign dut_pc       = pc_of(dcyc);
  assign dut_event    = ev_of(dcyc);
  assign dut_out_v    = (dcyc < N) && (dcyc % 2 == 0);
  assign dut_out_data = 32'(dcyc);
  assign dut_in_yumi  = dut_in_v;
  assign dut_mem_req_v    = (dcyc < N) && !waiting && (dcyc % 37 == 5);
  assign dut_mem_req_data = 32'(dcyc * 3);
  assign dut_csr_i[0] = 32'(dcyc);
  assign dut_csr_i[1] = 32'h0000_0d0e;

  initial foreach (ev_tally[k]) ev_tally[k] = 0;

  always @(posedge dut_gclk or posedge dut_rst) begin
    if (dut_rst) begin
      dcyc <= 0; waiting <= 0; dut_cov_sel <= '0;
    end else begin
      check(dut_out_ready, "DUT never sees its output stalled");
      ev_tally[int'(dut_event)]++;
      if (dut_mem_req_v && dut_mem_req_ready) begin
        waiting  <= 1;
        req_cyc  <= dcyc;
        req_word <= dut_mem_req_data;
      end
      if (dut_mem_resp_v) begin
        check(waiting, "response without request");
        check(dut_mem_resp_data == (req_word ^ 32'ha5a5_a5a5), "response data");
        check(dcyc == req_cyc + lat_of(req_word),
              $sformatf("response in cycle %0d, expected %0d", dcyc, req_cyc + lat_of(req_word)));
        waiting <= 0;
        resp_seen++;
      end
      if (dut_in_v) begin
        check(dut_in_data == 32'(1000 + in_seen), "host-to-DUT word order");
        in_seen++;
      end
      if (dcyc < 300) dut_cov_sel[dcyc % 64] <= ~dut_cov_sel[dcyc % 64];
      if (dcyc == 100) dut_cov_sel[NUM_COVER-1] <= 1'b1;
      dcyc <= dcyc + 1;
    end
  end

  // ------------------------------------------------------- mechanism counts
  int n_fifo_gate = 0, n_wait_lat = 0, n_early = 0, n_late = 0, n_prof_gate = 0, n_stopped = 0, n_uart = 0;
  always @(posedge dut_clk) if (!dut_rst) begin
    if (dut.gate_req[0]) n_fifo_gate++;
    if (dut.u_timer.state == TMR_WAIT_LAT) n_wait_lat++;
    if (dut.gate_req[3]) n_prof_gate++;
    if (dut.u_timer.state == TMR_COUNT && dut.u_timer.expire && dut.u_timer.resp_avail) n_early++;
    if (dut.u_timer.state == TMR_WAIT_RESP && dut.u_timer.resp_avail) n_late++;
    if (!dut.csr_out[0][0]) n_stopped++;
  end

  // ------------------------------------------------------------ host
  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    int n = 0;
    bit awd = 0, wd = 0;
    @(negedge aclk);
    s_axi_req.awaddr = a; s_axi_req.awvalid = 1; s_axi_req.wdata = d; s_axi_req.wvalid = 1;
    s_axi_req.wstrb = 4'hF; s_axi_req.bready = 1;
    while (!(awd && wd)) begin
      @(posedge aclk);
      if (s_axi_rsp.awready) awd = 1;
      if (s_axi_rsp.wready)  wd  = 1;
      #1;
      if (awd) s_axi_req.awvalid = 0;
      if (wd)  s_axi_req.wvalid  = 0;
    end
    do begin @(posedge aclk); n++; end while (!s_axi_rsp.bvalid && n < 100);
    #1 s_axi_req.bready = 0;
    check(n < 100, "GP0 write completes");
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    int n = 0;
    @(negedge aclk);
    s_axi_req.araddr = a; s_axi_req.arvalid = 1; s_axi_req.rready = 1;
    do @(posedge aclk); while (!s_axi_rsp.arready);
    #1 s_axi_req.arvalid = 0;
    do begin @(posedge aclk); n++; end while (!s_axi_rsp.rvalid && n < 100);
    d = s_axi_rsp.rdata;
    #1 s_axi_req.rready = 0;
    check(n < 100, "GP0 read completes");
  endtask

  localparam logic [31:0] A_IN = 32'h00, A_RESP = 32'h08, A_OUT = 32'h10, A_OUT_CNT = 32'h14,
                          A_REQ = 32'h18, A_REQ_CNT = 32'h1C, A_SMP = 32'h20, A_SMP_CNT = 32'h24,
                          A_CTRL = 32'h28, A_LAT = 32'h2C, A_SI = 32'h30, A_COVIDX = 32'h34,
                          A_USER0 = 32'h38, A_CNT0 = 32'h40, A_COV = 32'h60, A_RUN = 32'h64,
                          A_GATED = 32'h68, A_UIN0 = 32'h6C, A_UIN1 = 32'h70;

  int out_next = 0, smp_next = 0, reqs = 0;
  bit have_w0 = 0;
  logic [31:0] w0;

  initial begin
    logic [31:0] v, c;
    repeat (4) @(posedge aclk);
    aresetn = 1; dut_rst = 0;
    repeat (4) @(posedge aclk);
    axi_write(A_SI, SI);
    axi_write(A_USER0, 32'h1234);
    for (int i = 0; i < 3; i++) axi_write(A_IN, 32'(1000 + i));
    axi_write(A_CTRL, 32'h1);   // run
    while (1) begin
      // user output words, drained four at a time
      axi_read(A_OUT_CNT, c);
      for (int i = 0; i < 4 && i < int'(c); i++) begin
        axi_read(A_OUT, v);
        check(v == 32'(out_next), $sformatf("output word %0d = %0d", out_next, v));
        out_next += 2;
      end
      // memory requests
      axi_read(A_REQ_CNT, c);
      if (c != 0) begin
        axi_read(A_REQ, v);
        if (reqs % 2 == 0) begin
          axi_write(A_RESP, v ^ 32'ha5a5_a5a5);
          axi_write(A_LAT, 32'(lat_of(v)));
        end else begin
          axi_write(A_LAT, 32'(lat_of(v)));
          repeat (40) @(posedge aclk);
          axi_write(A_RESP, v ^ 32'ha5a5_a5a5);
        end
        reqs++;
      end
      // profiler samples
      axi_read(A_SMP_CNT, c);
      for (int i = 0; i < int'(c); i++) begin
        axi_read(A_SMP, v);
        if (!have_w0) begin w0 = v; have_w0 = 1; end
        else begin
          int cyc;
          have_w0 = 0;
          cyc = smp_next * SI + SI - 1;
          check(w0 == pc_of(cyc)[31:0] && v[6:0] == pc_of(cyc)[38:32] && v[31:29] == 3'(ev_of(cyc)),
                $sformatf("sample %0d (cycle %0d): %h_%h", smp_next, cyc, v, w0));
          smp_next++;
        end
      end
      axi_read(A_UIN0, c);
      if (int'(c) >= N && out_next >= N) break;
    end
    // stop the DUT, then compare counters
    axi_write(A_CTRL, 32'h0);
    repeat (40) @(posedge aclk);
    for (int k = 0; k < NUM_EVENTS; k++) begin
      axi_read(A_CNT0 + 32'(4 * k), v);
      check(v == 32'(ev_tally[k]), $sformatf("stall counter %0d = %0d, expected %0d", k, v, ev_tally[k]));
    end
    axi_read(A_RUN, v);   check(v == 32'(dcyc), $sformatf("run cycles %0d, DUT cycles %0d", v, dcyc));
    axi_read(A_GATED, v); check(v > 0, "some cycles were gated");
    $display("DUT cycles %0d, gated cycles %0d", dcyc, v);
    axi_read(A_UIN1, v);  check(v == 32'h0d0e, "user input CSR");
    check(dut_csr_o[0] == 32'h1234, "user output CSR");
    check(in_seen == 3, "three host words consumed");
    check(resp_seen == reqs && reqs > 10, $sformatf("%0d responses for %0d requests", resp_seen, reqs));
    check(smp_next >= N / SI - 1, $sformatf("%0d samples", smp_next));
    // coverage words
    for (int w = 0; w < (NUM_COVER + 31) / 32; w++) begin
      logic [31:0] e;
      e = (w < 2) ? 32'hffff_ffff : (w == NUM_COVER / 32) ? 32'(1) << (NUM_COVER % 32 - 1) : 32'h0;
      if (w > 3 && w != NUM_COVER / 32 && w % 17 != 0) continue;
      axi_write(A_COVIDX, 32'(w));
      repeat (30) @(posedge aclk);
      axi_read(A_COV, v);
      check(v == e, $sformatf("coverage word %0d = %h expected %h", w, v, e));
    end
    // clear counters (control bit 1)
    axi_write(A_CTRL, 32'h2);
    repeat (40) @(posedge aclk);
    axi_read(A_CNT0, v); check(v == 0, "counters cleared");
    // switch GP0 to the UART bridge and read the run-cycle CSR over serial
    use_uart = 1;
    n_uart++;
    u_uart.send_byte(8'h00);
    for (int i = 0; i < 4; i++) u_uart.send_byte(A_UIN1[8*i +: 8]);
    begin
      int k = 0;
      while (u_uart.tx_q.size() < 4 && k < 20000) begin @(posedge aclk); k++; end
      v = '0;
      for (int i = 0; i < 4 && u_uart.tx_q.size() > 0; i++) v[8*i +: 8] = u_uart.tx_q.pop_front();
      check(v == 32'h0d0e, $sformatf("read over UART bridge = %h", v));
    end
    $display("mechanisms: fifo-full gate %0d, latency wait %0d, early resp %0d, late resp %0d, profiler gate %0d, stopped %0d, uart %0d",
             n_fifo_gate, n_wait_lat, n_early, n_late, n_prof_gate, n_stopped, n_uart);
    check(n_fifo_gate > 0, "FIFO-full gating happened");
    check(n_wait_lat > 0, "latency wait happened");
    check(n_early > 0, "early response happened");
    check(n_late > 0, "late response happened");
    check(n_prof_gate > 0, "profiler gating happened");
    check(n_stopped > 0, "software stop happened");
    check(n_uart > 0, "UART mode happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
