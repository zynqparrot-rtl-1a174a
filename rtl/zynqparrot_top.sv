// zynqparrot_top: the co-emulation shell around one device under test.
//
// The host reaches the design over GP0 (AXI4-Lite, clock aclk), either
// directly from a Zynq PS or, with use_uart high, through uart_bridge, which
// polls a 16550 UART on m_uart_* and replays the bytes as pseudo-GP0 accesses.
// GP0 lands in pshell, which exposes FIFOs and CSRs and crosses them into the
// DUT clock domain. In that domain, on the ungated dut_clk, sit the gating FSM,
// the model timer, the profiler, the stall counters and the coverpoints; the
// DUT itself runs on dut_gclk, the gated clock, and attaches to the dut_*
// ports. clk_en (also output as dut_clk_en) is high in every cycle whose
// closing edge reaches the DUT; all shell registers on the DUT side advance
// only in such cycles, so from the DUT's view every interface is ideal and
// every run is cycle-for-cycle repeatable.
//
// Channels (the allocation is this design's choice):
//   host-to-DUT FIFO 0  dut_in_*       user data, ready/valid, not timed
//   host-to-DUT FIFO 1  dut_mem_resp_* memory responses, released by the timer
//   DUT-to-host FIFO 0  dut_out_*      user data; gates the DUT when full
//   DUT-to-host FIFO 1  dut_mem_req_*  memory requests; starts the timer
//   DUT-to-host FIFO 2  profiler samples
//   output CSR 0  control: bit 0 run, bit 1 clear stall counters,
//                 bit 2 clear coverage (bits 1-2 act on each write)
//   output CSR 1  model latency for the outstanding memory request
//   output CSR 2  profiler sample interval (0 = off)
//   output CSR 3  coverage word index
//   output CSR 4-5  dut_csr_o[0..1]
//   input CSR 0-7   stall counters by event class
//   input CSR 8     coverage word selected by output CSR 3
//   input CSR 9/10  DUT cycles run / cycles gated
//   input CSR 11-12 dut_csr_i[0..1]
// With the pshell word map this puts FIFO k data/count at byte 8k/8k+4
// (k = 0..4), output CSRs at 0x28.. and input CSRs at 0x40...
//
// DUT interface timing, all relative to dut_gclk: the DUT samples dut_*
// outputs of the shell at its edges and drives its own outputs after them. A
// memory request is taken in the cycle dut_mem_req_v and dut_mem_req_ready are
// both high; the response is shown (dut_mem_resp_v) in exactly the cycle the
// host's latency says, and is consumed at the end of that cycle.
// dut_out_ready is constant high: a full output FIFO gates the DUT instead of
// refusing a word, so the DUT never sees backpressure. The constant bits of
// the AXI ports are those of pshell (OKAY responses) and uart_bridge.
module zynqparrot_top
  import zp_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned PC_W       = 39,
  parameter int unsigned NUM_COVER  = 3284,
  parameter logic [31:0] UART_BASE  = 32'h0000_1000
) (
  // host side
  input  logic                  aclk,
  input  logic                  aresetn,
  input  axil_req_t             s_axi_req,
  output axil_rsp_t             s_axi_rsp,
  input  logic                  use_uart,
  output axil_req_t             m_uart_req,
  input  axil_rsp_t             m_uart_rsp,

  // DUT side
  input  logic                  dut_clk,
  input  logic                  dut_rst,
  output logic                  dut_gclk,
  output logic                  dut_clk_en,

  output logic [31:0]           dut_in_data,
  output logic                  dut_in_v,
  input  logic                  dut_in_yumi,

  input  logic [31:0]           dut_out_data,
  input  logic                  dut_out_v,
  output logic                  dut_out_ready,

  input  logic [31:0]           dut_mem_req_data,
  input  logic                  dut_mem_req_v,
  output logic                  dut_mem_req_ready,
  output logic [31:0]           dut_mem_resp_data,
  output logic                  dut_mem_resp_v,

  input  logic [PC_W-1:0]       dut_pc,
  input  perf_event_e           dut_event,
  input  logic [NUM_COVER-1:0]  dut_cov_sel,

  output logic [1:0][31:0]      dut_csr_o,
  input  logic [1:0][31:0]      dut_csr_i
);
  localparam int unsigned NUM_P2D     = 2;
  localparam int unsigned NUM_D2P     = 3;
  localparam int unsigned NUM_CSR_OUT = 6;
  localparam int unsigned NUM_CSR_IN  = 13;

  // ------------------------------------------------------ GP0 source select
  axil_req_t shell_req, bridge_gp0_req;
  axil_rsp_t shell_rsp, bridge_gp0_rsp;

  uart_bridge #(.UART_BASE(UART_BASE)) u_bridge (
    .clk(aclk), .rst(!aresetn),
    .m_uart_req(m_uart_req), .m_uart_rsp(m_uart_rsp),
    .m_gp0_req(bridge_gp0_req), .m_gp0_rsp(bridge_gp0_rsp)
  );

  assign shell_req      = use_uart ? bridge_gp0_req : s_axi_req;
  assign s_axi_rsp      = use_uart ? '0 : shell_rsp;
  assign bridge_gp0_rsp = use_uart ? shell_rsp : '0;

  // ------------------------------------------------------------- the shell
  logic [NUM_CSR_OUT-1:0][31:0] csr_out;
  logic [NUM_CSR_OUT-1:0]       csr_upd;
  logic [NUM_CSR_IN-1:0][31:0]  csr_in;
  logic [NUM_P2D-1:0][31:0]     p2d_data;
  logic [NUM_P2D-1:0]           p2d_valid, p2d_yumi;
  logic [NUM_D2P-1:0][31:0]     d2p_data;
  logic [NUM_D2P-1:0]           d2p_push, d2p_full;

  pshell #(
    .NUM_P2D(NUM_P2D), .NUM_D2P(NUM_D2P),
    .NUM_CSR_OUT(NUM_CSR_OUT), .NUM_CSR_IN(NUM_CSR_IN),
    .FIFO_DEPTH(FIFO_DEPTH)
  ) u_shell (
    .aclk(aclk), .aresetn(aresetn), .s_axi_req(shell_req), .s_axi_rsp(shell_rsp),
    .dclk(dut_clk), .drst(dut_rst),
    .csr_out(csr_out), .csr_out_upd(csr_upd), .csr_in(csr_in),
    .p2d_data(p2d_data), .p2d_valid(p2d_valid), .p2d_yumi(p2d_yumi),
    .d2p_data(d2p_data), .d2p_push(d2p_push), .d2p_full(d2p_full)
  );

  // ------------------------------------------------------ gating and clock
  logic        clk_en;
  logic [3:0]  gate_req;
  logic        tmr_gate, prof_gate;
  logic [31:0] run_cycles, gated_cycles;

  assign gate_req[0] = dut_out_v && d2p_full[0];
  assign gate_req[1] = dut_mem_req_v && dut_mem_req_ready && d2p_full[1];
  assign gate_req[2] = tmr_gate;
  assign gate_req[3] = prof_gate;

  gating_fsm #(.NUM_REQ(4), .CNT_W(32)) u_gate (
    .clk(dut_clk), .rst(dut_rst), .run(csr_out[0][0]), .gate_req(gate_req),
    .clk_en(clk_en), .state(), .run_cycles(run_cycles), .gated_cycles(gated_cycles)
  );

  clock_gate u_cg (.clk(dut_clk), .en(clk_en), .gclk(dut_gclk));
  assign dut_clk_en = clk_en;

  // ------------------------------------------------------ user data FIFOs
  assign dut_in_data   = p2d_data[0];
  assign dut_in_v      = p2d_valid[0];
  assign p2d_yumi[0]   = dut_in_yumi && p2d_valid[0] && clk_en;

  assign d2p_data[0]   = dut_out_data;
  assign d2p_push[0]   = dut_out_v && clk_en;
  assign dut_out_ready = 1'b1;  // never seen low: a full FIFO gates the DUT instead

  // ------------------------------------------------------ timed memory channel
  logic resp_pop;

  model_timer #(.LAT_W(32)) u_timer (
    .clk(dut_clk), .rst(dut_rst), .clk_en(clk_en),
    .req_v(dut_mem_req_v), .req_ready(dut_mem_req_ready),
    .lat_v(csr_upd[1]), .lat(csr_out[1]),
    .resp_avail(p2d_valid[1]), .resp_pop(resp_pop),
    .gate_req(tmr_gate), .state()
  );

  assign d2p_data[1]       = dut_mem_req_data;
  assign d2p_push[1]       = dut_mem_req_v && dut_mem_req_ready && clk_en;
  assign dut_mem_resp_v    = resp_pop;
  assign dut_mem_resp_data = p2d_data[1];
  assign p2d_yumi[1]       = resp_pop && clk_en;

  // ------------------------------------------------------ profiling
  logic [NUM_EVENTS-1:0][31:0] counts;

  perf_profiler #(.PC_W(PC_W)) u_prof (
    .clk(dut_clk), .rst(dut_rst), .clk_en(clk_en), .interval(csr_out[2]),
    .pc(dut_pc), .event_i(dut_event),
    .fifo_full(d2p_full[2]), .fifo_push(d2p_push[2]), .fifo_data(d2p_data[2]),
    .gate_req(prof_gate), .samples()
  );

  stall_counters #(.NUM_EV(NUM_EVENTS), .CNT_W(32)) u_cnt (
    .clk(dut_clk), .rst(dut_rst), .clk_en(clk_en),
    .clear(csr_upd[0] && csr_out[0][1]), .event_i(dut_event), .counts(counts)
  );

  // ------------------------------------------------------ coverage
  logic [31:0] cov_word;

  coverage_collector #(.NUM_COVER(NUM_COVER)) u_cov (
    .clk(dut_clk), .rst(dut_rst), .clk_en(clk_en),
    .clear(csr_upd[0] && csr_out[0][2]), .sel(dut_cov_sel),
    .word_idx(csr_out[3]), .word(cov_word)
  );

  // ------------------------------------------------------ input CSRs
  always_comb begin
    for (int i = 0; i < int'(NUM_EVENTS); i++) csr_in[i] = counts[i];
    csr_in[8]  = cov_word;
    csr_in[9]  = run_cycles;
    csr_in[10] = gated_cycles;
    csr_in[11] = dut_csr_i[0];
    csr_in[12] = dut_csr_i[1];
  end

  assign dut_csr_o[0] = csr_out[4];
  assign dut_csr_o[1] = csr_out[5];
endmodule
