// stall_counters_tb: random event classes with random clock enables; the
// counters must equal an independent per-class tally of executed cycles, and
// clear must zero them.
module stall_counters_tb;
  import zp_pkg::*;
  logic clk = 0, rst = 1, clk_en = 0, clear = 0;
  perf_event_e event_i = EV_COMMIT;
  logic [NUM_EVENTS-1:0][31:0] counts;
  int checks = 0, failures = 0;
  int ref_cnt [NUM_EVENTS];

  always #5 clk = ~clk;

  stall_counters #(.NUM_EV(NUM_EVENTS), .CNT_W(32)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic compare(string when);
    for (int k = 0; k < NUM_EVENTS; k++)
      check(counts[k] == 32'(ref_cnt[k]), $sformatf("%s: class %0d count %0d expected %0d", when, k, counts[k], ref_cnt[k]));
  endtask

  initial begin
    foreach (ref_cnt[k]) ref_cnt[k] = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    compare("after reset");
    for (int i = 0; i < 2000; i++) begin
      clk_en  = ($urandom % 4) != 0;
      event_i = perf_event_e'($urandom % NUM_EVENTS);
      if (clk_en) ref_cnt[int'(event_i)]++;
      @(posedge clk); #1;
      if (i % 100 == 99) compare("running");
    end
    clear = 1; clk_en = 1;
    @(posedge clk); #1;
    clear = 0;
    foreach (ref_cnt[k]) ref_cnt[k] = 0;
    compare("after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
