// clock_gate: glitch-free enable gate that produces the DUT's gated clock.
//
// The enable is sampled on the falling edge of clk and ANDed with clk, so the
// gated clock can only start or stop while clk is low and never shows a runt
// pulse. An enable presented during cycle n (before the falling edge) decides
// whether the rising edge that ends cycle n reaches the DUT. This is the
// behaviour of an FPGA enable clock buffer (BUFGCE) or an ASIC integrated clock
// gating cell; on an FPGA the module is meant to be replaced by that primitive.
// The enable register has no reset (the clock it gates is what a reset would
// need); it holds a defined value after the first falling edge of clk.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_q;

  always_ff @(negedge clk) en_q <= en;

  assign gclk = clk & en_q;
endmodule
