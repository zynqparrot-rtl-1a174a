// perf_profiler: streams (PC, event class) samples of DUT cycles to the host.
//
// Every interval-th executed DUT cycle (interval 1 samples every cycle, 0
// turns sampling off) the current PC and event class are written to a
// DUT-to-host FIFO as two 32-bit words: first PC[31:0], then {event, zeros,
// PC[PC_W-1:32]}. The first word is pushed on the clock edge that ends the
// sampled cycle; if the FIFO is full in that cycle the profiler asks for the
// DUT clock to be gated, so the DUT waits, still showing the same PC and event,
// until there is room. The second word is pushed on a following edge while the
// DUT is held gated. Sampling therefore never drops a sample and never changes
// what the DUT does; only wall-clock time grows with the sample rate.
//
// While interval is 0 the cycle count is held at zero, so after sampling is
// switched on the first sample is the interval-th executed cycle.
//
// Timing: fifo_push may be high only in cycles where the FIFO is not full.
// samples counts samples taken. All registers are on the ungated DUT clock;
// reset is synchronous, active high.
//
// Sampling PC and stall class at a host-set rate, with clock gating as the
// backpressure, follows the shell's profiling scheme; the two-word format and
// PC_W = 39 (the instrumented core's virtual address width) are this design's.
module perf_profiler
  import zp_pkg::*;
#(
  parameter int unsigned PC_W = 39
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            clk_en,
  input  logic [31:0]     interval,
  input  logic [PC_W-1:0] pc,
  input  perf_event_e     event_i,
  input  logic            fifo_full,
  output logic            fifo_push,
  output logic [31:0]     fifo_data,
  output logic            gate_req,
  output logic [31:0]     samples
);
  logic [31:0] cnt;
  logic        due;
  logic        pending;
  logic [31:0] beat1;
  logic [63:0] pc_ext;

  assign pc_ext    = 64'(pc);
  assign due       = (interval != 0) && (cnt >= interval - 1);
  assign gate_req  = pending || (due && fifo_full);
  assign fifo_push = (pending && !fifo_full) || (due && clk_en);
  assign fifo_data = pending ? beat1 : pc_ext[31:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      pending <= 1'b0;
      beat1   <= '0;
      samples <= '0;
    end else begin
      if (pending && !fifo_full) pending <= 1'b0;
      if (clk_en) begin
        if (due) begin
          cnt     <= '0;
          pending <= 1'b1;
          beat1   <= {event_i, 29'(pc_ext[63:32])};
          samples <= samples + 1'b1;
        end else if (interval != 0) begin
          cnt <= cnt + 1'b1;
        end
      end
      if (interval == 0) cnt <= '0;
    end
  end

  a_no_push_when_full: assert property (@(posedge clk) disable iff (rst) fifo_push |-> !fifo_full);
endmodule
