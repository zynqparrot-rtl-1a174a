// csr_sync: moves a multi-bit control/status register value between clocks.
//
// The source side loads sdata into a holding register when swe is high and
// flips a toggle bit. The toggle crosses into the destination domain through two
// flip-flops; when the synchronized toggle differs from its previous value the
// destination copies the (by then stable) holding register into ddata and
// pulses dupdate for one destination cycle. The holding register is only read
// after its toggle has crossed, so no bit of a value is ever torn.
//
// sready, in the source domain, is high once the last value has been captured
// on the other side (the destination's toggle copy returns through two more
// flip-flops). A writer that only writes while sready is high, such as a
// status register refreshed continuously, can never tear a value.
//
// Timing: ddata follows a write three destination edges after the source edge
// that performed it (two synchronizer flops plus the capture). Writes closer
// together than that are merged; the last value always arrives. Both resets are
// synchronous and active high; after reset ddata is zero and no pulse is given.
//
// The shell names "CSR synchronizers" between its clock and the DUT clock; this
// toggle-and-hold construction is this design's choice of one.
module csr_sync #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             sclk,
  input  logic             srst,
  input  logic             swe,
  input  logic [WIDTH-1:0] sdata,
  output logic             sready,

  input  logic             dclk,
  input  logic             drst,
  output logic [WIDTH-1:0] ddata,
  output logic             dupdate
);
  logic [WIDTH-1:0] hold;
  logic             stog;
  logic             dq1, dq2, dq3;
  logic             sq1, sq2;

  assign sready = (sq2 == stog);

  always_ff @(posedge sclk) begin
    if (srst) begin
      hold <= '0;
      stog <= 1'b0;
      sq1  <= 1'b0;
      sq2  <= 1'b0;
    end else begin
      sq1 <= dq3;
      sq2 <= sq1;
      if (swe) begin
        hold <= sdata;
        stog <= ~stog;
      end
    end
  end

  always_ff @(posedge dclk) begin
    if (drst) begin
      dq1     <= 1'b0;
      dq2     <= 1'b0;
      dq3     <= 1'b0;
      ddata   <= '0;
      dupdate <= 1'b0;
    end else begin
      dq1     <= stog;
      dq2     <= dq1;
      dq3     <= dq2;
      dupdate <= (dq2 != dq3);
      if (dq2 != dq3) ddata <= hold;
    end
  end
endmodule
