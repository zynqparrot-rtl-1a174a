// stall_counters: per-class cycle counters for time-proportional profiling.
//
// Each DUT cycle carries one event class (commit, or the reason the commit
// stage is stalled). On every executed DUT cycle (clk_en high) the counter of
// that class increments; gated cycles are not counted, so the counts are
// exactly those of an unobserved run. clear zeroes every counter (it wins over
// an increment in the same cycle). Counters are CNT_W bits and wrap. The host
// reads them through input CSRs. Reset is synchronous, active high.
//
// Synthesizable stall counters placed next to the DUT are part of the shell's
// profiling support; the class list follows the stall categories of the
// profiling study, the width and wrap-around are this design's choices.
module stall_counters
  import zp_pkg::*;
#(
  parameter int unsigned NUM_EV = NUM_EVENTS,
  parameter int unsigned CNT_W  = 32
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    clk_en,
  input  logic                    clear,
  input  perf_event_e             event_i,
  output logic [NUM_EV-1:0][CNT_W-1:0] counts
);
  always_ff @(posedge clk) begin
    if (rst || clear) begin
      counts <= '0;
    end else if (clk_en) begin
      for (int i = 0; i < int'(NUM_EV); i++)
        if (int'(event_i) == i) counts[i] <= counts[i] + 1'b1;
    end
  end
endmodule
