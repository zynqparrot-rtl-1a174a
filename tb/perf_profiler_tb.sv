// perf_profiler_tb: a behavioural FIFO of 4 entries, drained slowly, takes the
// profiler's words. The DUT's PC and event change on every executed cycle.
// For intervals 1, 10 and 100 every interval-th executed cycle must appear
// as a correct two-word sample, no sample may be lost, and the profiler must
// have gated the DUT (the FIFO is too slow for interval 1).
module perf_profiler_tb;
  import zp_pkg::*;
  localparam int PC_W = 39;
  logic clk = 0, rst = 1;
  logic clk_en, fifo_full, fifo_push, gate_req;
  logic [31:0] interval = 0, fifo_data, samples;
  logic [PC_W-1:0] pc = '0;
  perf_event_e event_i = EV_COMMIT;
  int checks = 0, failures = 0, gated = 0, dcyc = 0, got = 0;
  logic [31:0] fifo[$];
  logic [63:0] expect_q[$];

  always #5 clk = ~clk;
  int occ = 0;   // registered occupancy, so push and pop see the same edge
  logic pop;
  assign fifo_full = occ >= 4;
  always @(posedge clk) occ <= occ + int'(fifo_push) - int'(pop);
  assign clk_en = !rst && !gate_req;

  perf_profiler #(.PC_W(PC_W)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // DUT model and reference sampler
  always @(posedge clk) if (!rst) begin
    if (fifo_push) fifo.push_back(fifo_data);
    if (gate_req) gated++;
    if (clk_en) begin
      if (interval != 0 && (dcyc % interval) == interval - 1)
        expect_q.push_back({event_i, 22'h0, pc});
      dcyc    <= dcyc + 1;
      pc      <= {$urandom, $urandom} & ((64'h1 << PC_W) - 1);
      event_i <= perf_event_e'($urandom % 8);
    end
  end

  // slow host: pops one word every 3 cycles, pairs words into samples
  logic [31:0] w0;
  bit have_w0 = 0;
  always @(negedge clk) pop <= !rst && ($urandom % 3 == 0) && occ > 0;
  always @(posedge clk) if (pop) begin
    logic [31:0] w;
    w = fifo.pop_front();
    if (!have_w0) begin w0 = w; have_w0 = 1; end
    else begin
      logic [63:0] e;
      have_w0 = 0;
      got++;
      check(expect_q.size() > 0, "sample without reference");
      if (expect_q.size() > 0) begin
        e = expect_q.pop_front();
        check(w0 == e[31:0] && w[31:29] == e[63:61] && w[6:0] == e[38:32],
              $sformatf("sample %0d: %h_%h expected %h", got, w, w0, e));
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 3; k++) begin
      int si;
      si = (k == 0) ? 1 : (k == 1) ? 10 : 100;
      @(negedge clk);
      interval = 32'(si);
      dcyc = 0;
      repeat (si == 100 ? 3000 : 600) @(posedge clk);
      @(negedge clk);
      interval = 0;
      repeat (50) @(posedge clk);
      check(expect_q.size() == 0 && fifo.size() == 0, $sformatf("SI=%0d: all samples received", si));
    end
    check(gated > 0, "profiler gated the DUT at least once");
    check(samples == 32'(got), "sample counter");
    $display("gated cycles %0d, samples %0d", gated, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
