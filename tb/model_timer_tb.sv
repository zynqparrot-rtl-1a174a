// model_timer_tb: a behavioural DUT issues requests, a behavioural host
// programs random latencies after random delays and supplies responses either
// early (before the latency expires) or late. Every response must reach the
// DUT in exactly the programmed number of DUT cycles after its request, and
// the DUT must be gated while the host has not yet answered. Both the early
// and the late case must occur.
module model_timer_tb;
  import zp_pkg::*;
  logic clk = 0, rst = 1;
  logic clk_en, req_v = 0, req_ready, lat_v = 0, resp_avail = 0, resp_pop, gate_req;
  logic [31:0] lat = '0;
  logic run = 1;
  timer_state_e state;
  int checks = 0, failures = 0, early = 0, late = 0, done = 0;
  int dcyc = 0, req_cyc = 0, prog_lat = 0;

  always #5 clk = ~clk;
  assign clk_en = !rst && run && !gate_req;

  model_timer #(.LAT_W(32)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // DUT-cycle counter and DUT behaviour
  always @(posedge clk) if (!rst) begin
    if (clk_en) begin
      if (req_v && req_ready) begin
        req_cyc <= dcyc;
        req_v   <= 1'b0;
      end
      if (resp_pop) begin
        int exp_l;
        exp_l = prog_lat < 1 ? 1 : prog_lat;
        check(dcyc == req_cyc + exp_l,
              $sformatf("response in DUT cycle %0d, expected %0d", dcyc, req_cyc + exp_l));
        done++;
      end
      dcyc <= dcyc + 1;
      if (!req_v && state == TMR_IDLE && !(req_v && req_ready) && ($urandom % 4 == 0)) req_v <= 1'b1;
    end
    run <= ($urandom % 8) != 0;
  end

  // host: answers each request
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    while (done < 60) begin
      int d1, l, extra;
      bit is_early;
      @(posedge clk);
      if (state != TMR_WAIT_LAT) continue;
      d1 = $urandom % 8;
      l  = $urandom % 12;
      is_early = ($urandom % 2) == 1;
      repeat (d1) begin
        @(posedge clk);
        check(!clk_en, "DUT must be gated while waiting for the latency");
      end
      if (is_early) resp_avail <= 1'b1;
      prog_lat = l;
      lat   <= 32'(l);
      lat_v <= 1'b1;
      @(posedge clk);
      lat_v <= 1'b0;
      if (!is_early) begin
        extra = ($urandom % 6) + 1;
        // wait past expiry in DUT cycles
        repeat (l + extra + 8) @(posedge clk);
        if (state == TMR_WAIT_RESP) begin
          late++;
          check(!clk_en, "DUT gated while response late");
        end
        resp_avail <= 1'b1;
      end else begin
        early++;
      end
      // wait for the pop
      while (!(resp_pop && clk_en)) @(posedge clk);
      @(negedge clk);
      resp_avail <= 1'b0;
    end
    check(early > 0 && late > 0, $sformatf("early %0d late %0d", early, late));
    check(done == 60, "all responses delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
