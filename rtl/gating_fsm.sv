// gating_fsm: decides, cycle by cycle, whether the DUT's clock edge happens.
//
// Every source of interfering backpressure raises one bit of gate_req: a
// DUT-to-host FIFO that cannot take the word the DUT is offering, the model
// timer waiting on the host, the profiler with a sample it cannot write yet.
// The software run bit (an output CSR) can also hold the DUT. The enable is
// combinational, clk_en = run & ~|gate_req, so the edge that ends the current
// cycle is suppressed in the very cycle the conflict exists; the DUT never
// observes a stalled interface, it simply does not advance. The enable drives
// clock_gate for the DUT and qualifies every register the shell keeps in the
// DUT clock domain, which runs on the ungated clock.
//
// state records what the last edge did (GATE_RUN or GATE_GATED); run_cycles
// counts edges that reached the DUT and gated_cycles those that did not, which
// gives the co-emulation slowdown directly. Reset is synchronous, active high,
// and clears both counters.
//
// The shell describes a gating FSM in the DUT clock domain that stops the DUT
// on backpressure; the request vector, the run bit and the two counters are
// this design's.
module gating_fsm
  import zp_pkg::*;
#(
  parameter int unsigned NUM_REQ = 4,
  parameter int unsigned CNT_W   = 32
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               run,
  input  logic [NUM_REQ-1:0] gate_req,
  output logic               clk_en,
  output gate_state_e        state,
  output logic [CNT_W-1:0]   run_cycles,
  output logic [CNT_W-1:0]   gated_cycles
);
  assign clk_en = !rst && run && !(|gate_req);

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= GATE_GATED;
      run_cycles   <= '0;
      gated_cycles <= '0;
    end else begin
      state <= clk_en ? GATE_RUN : GATE_GATED;
      if (clk_en) run_cycles   <= run_cycles + 1'b1;
      else        gated_cycles <= gated_cycles + 1'b1;
    end
  end
endmodule
