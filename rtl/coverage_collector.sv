// coverage_collector: mux-toggle coverpoints as one sticky bit each.
//
// Every coverpoint is the select signal of a multiplexer in the DUT. A copy of
// last executed cycle's selects is kept; when a select differs from its copy
// on an executed DUT cycle (clk_en high) its coverage bit is set and stays set.
// Only toggles between two executed cycles count, so clock gating never creates
// or hides coverage. The first executed cycle after reset or clear only loads
// the copy. clear zeroes every bit, which lets the host measure coverage
// increments over a region of a run.
//
// The host reads the bits 32 at a time: word returns bits [32*word_idx +: 32]
// (zero beyond NUM_COVER) combinationally. Reset is synchronous, active high.
//
// One bit of coverage state per mux select, rather than a counter, follows the
// shell's coverage scheme; the default of 3284 points is the size quoted for
// the RISC-V core it instrumented. The extra last-value flop per point, the
// clear and the word readout are this design's choices.
module coverage_collector #(
  parameter int unsigned NUM_COVER = 3284
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 clk_en,
  input  logic                 clear,
  input  logic [NUM_COVER-1:0] sel,
  input  logic [31:0]          word_idx,
  output logic [31:0]          word
);
  localparam int unsigned NUM_WORDS = (NUM_COVER + 31) / 32;

  logic [NUM_COVER-1:0]    sel_q;
  logic [NUM_COVER-1:0]    cov;
  logic                    primed;
  logic [32*NUM_WORDS-1:0] cov_pad;

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      cov    <= '0;
      primed <= 1'b0;
      sel_q  <= '0;
    end else if (clk_en) begin
      sel_q  <= sel;
      primed <= 1'b1;
      if (primed) cov <= cov | (sel ^ sel_q);
    end
  end

  assign cov_pad = (32*NUM_WORDS)'(cov);

  always_comb begin
    word = '0;
    for (int unsigned i = 0; i < NUM_WORDS; i++)
      if (word_idx == i) word = cov_pad[32*i +: 32];
  end
endmodule
