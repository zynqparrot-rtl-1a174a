// async_fifo: dual-clock FIFO between the host-side shell clock and the DUT clock.
//
// A power-of-two array written in the write clock domain and read in the read
// clock domain. Each side keeps a binary pointer one bit wider than the address
// and publishes its Gray-coded copy; the other side brings it over through two
// flip-flops. Full and empty are computed against the synchronized pointer, so
// they are conservative: a FIFO can look full (or empty) for up to three
// cycles of the other clock after a pop (or push), never the reverse.
//
// Interface: winc pushes wdata on a wclk edge unless wfull; wfree is the number
// of free slots as seen from the write side. The read side is first-word
// fall-through: rdata shows the head while !rempty, rinc pops it; rcount is the
// occupancy seen from the read side. Each side has its own synchronous,
// active-high reset; both must be asserted together.
//
// The shell only states that asynchronous FIFOs bridge the two clocks; the
// Gray-pointer construction, the depth and the width are this design's.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16   // power of two, at least 2
) (
  input  logic                       wclk,
  input  logic                       wrst,
  input  logic                       winc,
  input  logic [WIDTH-1:0]           wdata,
  output logic                       wfull,
  output logic [$clog2(DEPTH):0]     wfree,

  input  logic                       rclk,
  input  logic                       rrst,
  input  logic                       rinc,
  output logic [WIDTH-1:0]           rdata,
  output logic                       rempty,
  output logic [$clog2(DEPTH):0]     rcount
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW:0] ptr_t;

  logic [WIDTH-1:0] mem [DEPTH];

  ptr_t wbin, wgray, rq1_wgray, rq2_wgray;
  ptr_t rbin, rgray, wq1_rgray, wq2_rgray;

  function automatic ptr_t bin2gray(ptr_t b);
    return b ^ (b >> 1);
  endfunction

  function automatic ptr_t gray2bin(ptr_t g);
    ptr_t b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  ptr_t wq2_rbin;
  assign wq2_rbin = gray2bin(wq2_rgray);
  assign wfull    = (wbin[AW] != wq2_rbin[AW]) && (wbin[AW-1:0] == wq2_rbin[AW-1:0]);
  assign wfree    = (AW+1)'(DEPTH) - (wbin - wq2_rbin);

  always_ff @(posedge wclk) begin
    if (winc && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin      <= '0;
      wgray     <= '0;
      wq1_rgray <= '0;
      wq2_rgray <= '0;
    end else begin
      if (winc && !wfull) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
      wq1_rgray <= rgray;
      wq2_rgray <= wq1_rgray;
    end
  end

  // ---------------- read domain ----------------
  ptr_t rq2_wbin;
  assign rq2_wbin = gray2bin(rq2_wgray);
  assign rempty   = (rbin == rq2_wbin);
  assign rcount   = rq2_wbin - rbin;
  assign rdata    = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin      <= '0;
      rgray     <= '0;
      rq1_wgray <= '0;
      rq2_wgray <= '0;
    end else begin
      if (rinc && !rempty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
      rq1_wgray <= wgray;
      rq2_wgray <= rq1_wgray;
    end
  end

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("async_fifo: DEPTH must be a power of two >= 2");
  end
endmodule
