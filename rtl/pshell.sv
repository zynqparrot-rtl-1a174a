// pshell: the host-facing shell that turns GP0 accesses into FIFO and CSR
// traffic for the DUT, without ever letting a DUT fault hang the host.
//
// The host (the PS of a Zynq, or the UART bridge on other FPGAs) reaches the
// shell through an AXI4-Lite slave on the shell clock aclk. Behind it sit:
//   * NUM_P2D host-to-DUT SB-FIFOs ("semi-blocking"): the host side is
//     non-blocking, the DUT side is a ready/valid (valid/yumi) port;
//   * NUM_D2P DUT-to-host SB-FIFOs, non-blocking on the host side as well;
//   * NUM_CSR_OUT read/write output CSRs and NUM_CSR_IN read-only input CSRs.
// Every FIFO is an async_fifo whose other side is in the DUT clock domain
// (dclk, the ungated DUT clock), and every CSR crosses through a csr_sync.
//
// Word map (byte address = 4 x word, higher address bits ignored), in the
// order the overlay lists its registers: for FIFO k (host-to-DUT FIFOs first,
// then DUT-to-host) word 2k is its data and word 2k+1 its count; then the
// output CSRs; then the input CSRs. Unmapped words read as 0.
//   * Data word of a host-to-DUT FIFO: a write pushes, or is dropped if the
//     FIFO is full; reads return 0.
//   * Data word of a DUT-to-host FIFO: a read pops the head, or returns 0 if
//     the FIFO is empty.
//   * Count word: free slots (host-to-DUT) or words waiting (DUT-to-host), as
//     seen from the host side. Host software polls it before each access,
//     which is the "credit" half of the credit/valid protocol.
//   * Output CSR: read back the last value written; each write reaches the DUT
//     side as csr_out[i] with a one-cycle csr_out_upd[i] pulse.
//   * Input CSR: csr_in[i], resampled continuously from the DUT domain.
// Every transaction is answered with OKAY. A write is answered after at most
// a few cycles of each clock (an output CSR write waits for the previous
// write to that CSR to have crossed); a read is answered one cycle after its
// address. One read and one write may be outstanding. bresp and rresp are
// therefore constant OKAY outputs, kept so the port is a complete AXI4-Lite
// slave.
//
// Resets: aresetn (active low, aclk) and drst (active high, dclk), both
// synchronous, asserted together.
//
// FIFOs with a blocking DUT side and a non-blocking host side, count
// registers, CSRs and the clock-domain crossings follow the shell's
// description; the word map, the drop/zero rules and the 32-bit data width are
// this design's choices.
module pshell
  import zp_pkg::*;
#(
  parameter int unsigned NUM_P2D     = 2,
  parameter int unsigned NUM_D2P     = 3,
  parameter int unsigned NUM_CSR_OUT = 6,
  parameter int unsigned NUM_CSR_IN  = 13,
  parameter int unsigned FIFO_DEPTH  = 16,
  parameter int unsigned ADDR_W      = 12
) (
  input  logic                            aclk,
  input  logic                            aresetn,
  input  axil_req_t                       s_axi_req,
  output axil_rsp_t                       s_axi_rsp,

  input  logic                            dclk,
  input  logic                            drst,
  output logic [NUM_CSR_OUT-1:0][31:0]    csr_out,
  output logic [NUM_CSR_OUT-1:0]          csr_out_upd,
  input  logic [NUM_CSR_IN-1:0][31:0]     csr_in,

  output logic [NUM_P2D-1:0][31:0]        p2d_data,
  output logic [NUM_P2D-1:0]              p2d_valid,
  input  logic [NUM_P2D-1:0]              p2d_yumi,

  input  logic [NUM_D2P-1:0][31:0]        d2p_data,
  input  logic [NUM_D2P-1:0]              d2p_push,
  output logic [NUM_D2P-1:0]              d2p_full
);
  localparam int unsigned NUM_FIFO  = NUM_P2D + NUM_D2P;
  localparam int unsigned CSR_OUT_W = 2 * NUM_FIFO;
  localparam int unsigned CSR_IN_W  = CSR_OUT_W + NUM_CSR_OUT;
  localparam int unsigned CW        = $clog2(FIFO_DEPTH) + 1;
  localparam int unsigned WW        = ADDR_W - 2;

  logic arst;
  assign arst = !aresetn;

  // ---------------------------------------------------------------- AXI side
  logic [WW-1:0] aw_word;
  logic          aw_v, w_v;
  logic [31:0]   w_data;
  logic          bvalid, rvalid;
  logic [31:0]   rdata;

  logic          wr_fire;    // perform the buffered write this cycle
  logic          rd_fire;    // accept a read address this cycle

  // Decoded write target
  logic          wr_is_p2d, wr_is_csr;
  int unsigned   wr_fifo, wr_csr;
  logic [NUM_CSR_OUT-1:0] csr_sready;

  always_comb begin
    wr_is_p2d = 1'b0;
    wr_is_csr = 1'b0;
    wr_fifo   = 0;
    wr_csr    = 0;
    if (int'(aw_word) < int'(CSR_OUT_W)) begin
      wr_fifo   = int'(aw_word) / 2;
      wr_is_p2d = (aw_word[0] == 1'b0) && (wr_fifo < NUM_P2D);
    end else if (int'(aw_word) < int'(CSR_IN_W)) begin
      wr_is_csr = 1'b1;
      wr_csr    = int'(aw_word) - int'(CSR_OUT_W);
    end
  end

  assign wr_fire = aw_v && w_v && !bvalid && (!wr_is_csr || csr_sready[wr_csr]);
  assign rd_fire = s_axi_req.arvalid && !rvalid;

  assign s_axi_rsp.awready = !aw_v;
  assign s_axi_rsp.wready  = !w_v;
  assign s_axi_rsp.bvalid  = bvalid;
  assign s_axi_rsp.bresp   = AXI_OKAY;
  assign s_axi_rsp.arready = !rvalid;
  assign s_axi_rsp.rvalid  = rvalid;
  assign s_axi_rsp.rdata   = rdata;
  assign s_axi_rsp.rresp   = AXI_OKAY;

  // FIFO host-side views
  logic [NUM_P2D-1:0]          p2d_wfull;
  logic [NUM_P2D-1:0][CW-1:0]  p2d_wfree;
  logic [NUM_P2D-1:0]          p2d_winc;
  logic [NUM_P2D-1:0]          p2d_rempty;
  logic [NUM_D2P-1:0][31:0]    d2p_rdata;
  logic [NUM_D2P-1:0]          d2p_rempty;
  logic [NUM_D2P-1:0][CW-1:0]  d2p_rcount;
  logic [NUM_D2P-1:0]          d2p_rinc;

  logic [NUM_CSR_OUT-1:0][31:0] csr_q;
  logic [NUM_CSR_IN-1:0][31:0]  csr_in_a;

  always_comb begin
    p2d_winc = '0;
    if (wr_fire && wr_is_p2d) p2d_winc[wr_fifo] = 1'b1;
  end

  // Read decode
  logic [31:0] rd_value;
  always_comb begin
    int unsigned w;
    w        = int'(s_axi_req.araddr[ADDR_W-1:2]);
    rd_value = '0;
    d2p_rinc = '0;
    if (w < CSR_OUT_W) begin
      if (w / 2 < NUM_P2D) begin
        if (w[0]) rd_value = 32'(p2d_wfree[w/2]);
      end else begin
        if (w[0]) rd_value = 32'(d2p_rcount[w/2 - NUM_P2D]);
        else begin
          rd_value = d2p_rempty[w/2 - NUM_P2D] ? '0 : d2p_rdata[w/2 - NUM_P2D];
          d2p_rinc[w/2 - NUM_P2D] = rd_fire;
        end
      end
    end else if (w < CSR_IN_W) begin
      rd_value = csr_q[w - CSR_OUT_W];
    end else if (w < CSR_IN_W + NUM_CSR_IN) begin
      rd_value = csr_in_a[w - CSR_IN_W];
    end
  end

  always_ff @(posedge aclk) begin
    if (arst) begin
      aw_v    <= 1'b0;
      w_v     <= 1'b0;
      aw_word <= '0;
      w_data  <= '0;
      bvalid  <= 1'b0;
      rvalid  <= 1'b0;
      rdata   <= '0;
      csr_q   <= '0;
    end else begin
      if (s_axi_req.awvalid && !aw_v) begin
        aw_v    <= 1'b1;
        aw_word <= s_axi_req.awaddr[ADDR_W-1:2];
      end
      if (s_axi_req.wvalid && !w_v) begin
        w_v    <= 1'b1;
        w_data <= s_axi_req.wdata;
      end
      if (wr_fire) begin
        aw_v   <= 1'b0;
        w_v    <= 1'b0;
        bvalid <= 1'b1;
        if (wr_is_csr) csr_q[wr_csr] <= w_data;
      end
      if (bvalid && s_axi_req.bready) bvalid <= 1'b0;

      if (rd_fire) begin
        rvalid <= 1'b1;
        rdata  <= rd_value;
      end else if (rvalid && s_axi_req.rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------ FIFOs and CSRs
  for (genvar k = 0; k < NUM_P2D; k++) begin : g_p2d
    async_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
      .wclk(aclk), .wrst(arst), .winc(p2d_winc[k]), .wdata(w_data),
      .wfull(p2d_wfull[k]), .wfree(p2d_wfree[k]),
      .rclk(dclk), .rrst(drst), .rinc(p2d_yumi[k]), .rdata(p2d_data[k]),
      .rempty(p2d_rempty[k]), .rcount()
    );
    assign p2d_valid[k] = !p2d_rempty[k];
  end

  for (genvar k = 0; k < NUM_D2P; k++) begin : g_d2p
    async_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
      .wclk(dclk), .wrst(drst), .winc(d2p_push[k]), .wdata(d2p_data[k]),
      .wfull(d2p_full[k]), .wfree(),
      .rclk(aclk), .rrst(arst), .rinc(d2p_rinc[k]), .rdata(d2p_rdata[k]),
      .rempty(d2p_rempty[k]), .rcount(d2p_rcount[k])
    );
  end

  for (genvar i = 0; i < NUM_CSR_OUT; i++) begin : g_csr_out
    csr_sync #(.WIDTH(32)) u_sync (
      .sclk(aclk), .srst(arst), .swe(wr_fire && wr_is_csr && wr_csr == i),
      .sdata(w_data), .sready(csr_sready[i]),
      .dclk(dclk), .drst(drst), .ddata(csr_out[i]), .dupdate(csr_out_upd[i])
    );
  end

  for (genvar i = 0; i < NUM_CSR_IN; i++) begin : g_csr_in
    logic rdy;
    csr_sync #(.WIDTH(32)) u_sync (
      .sclk(dclk), .srst(drst), .swe(rdy), .sdata(csr_in[i]), .sready(rdy),
      .dclk(aclk), .drst(arst), .ddata(csr_in_a[i]), .dupdate()
    );
  end

  // AXI4-Lite slave rules
  a_bvalid_hold: assert property (@(posedge aclk) disable iff (arst)
                                  bvalid && !s_axi_req.bready |=> bvalid);
  a_rvalid_hold: assert property (@(posedge aclk) disable iff (arst)
                                  rvalid && !s_axi_req.rready |=> rvalid && $stable(rdata));
endmodule
