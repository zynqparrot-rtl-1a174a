// zp_pkg: types and constants shared by the co-emulation shell.
//
// Holds the AXI4-Lite request/response bundles used for the GP0 port, the
// pseudo-GP0 port of the UART bridge and the bridge's UART master port, the
// event classes the profiler and stall counters understand, and the state
// encodings of the two controllers. The AXI4-Lite subset (one outstanding
// transaction per direction, 32-bit data, OKAY responses) and the event
// encoding are this design's choices; the event classes themselves are the
// stall categories used in the profiling study this shell was built for.
package zp_pkg;

  localparam int unsigned AXI_AW = 32;
  localparam int unsigned AXI_DW = 32;

  typedef logic [AXI_DW-1:0] word_t;

  // Master-to-slave half of an AXI4-Lite link.
  typedef struct packed {
    logic [AXI_AW-1:0] awaddr;
    logic              awvalid;
    logic [AXI_DW-1:0] wdata;
    logic [3:0]        wstrb;
    logic              wvalid;
    logic              bready;
    logic [AXI_AW-1:0] araddr;
    logic              arvalid;
    logic              rready;
  } axil_req_t;

  // Slave-to-master half of an AXI4-Lite link.
  typedef struct packed {
    logic              awready;
    logic              wready;
    logic [1:0]        bresp;
    logic              bvalid;
    logic              arready;
    logic [AXI_DW-1:0] rdata;
    logic [1:0]        rresp;
    logic              rvalid;
  } axil_rsp_t;

  localparam logic [1:0] AXI_OKAY = 2'b00;

  // Per-cycle event class reported by the DUT at its commit stage.
  typedef enum logic [2:0] {
    EV_COMMIT      = 3'd0,
    EV_ICACHE_MISS = 3'd1,
    EV_DCACHE_MISS = 3'd2,
    EV_BR_MISPRED  = 3'd3,
    EV_BR_TAKEN    = 3'd4,
    EV_FMA_USE     = 3'd5,
    EV_LOAD_USE    = 3'd6,
    EV_OTHER       = 3'd7
  } perf_event_e;

  localparam int unsigned NUM_EVENTS = 8;

  typedef enum logic {
    GATE_RUN   = 1'b0,
    GATE_GATED = 1'b1
  } gate_state_e;

  typedef enum logic [1:0] {
    TMR_IDLE      = 2'd0,  // no request outstanding
    TMR_WAIT_LAT  = 2'd1,  // request sent, waiting for the host to program its latency
    TMR_COUNT     = 2'd2,  // DUT runs while the latency counts down
    TMR_WAIT_RESP = 2'd3   // latency expired before the response arrived
  } timer_state_e;

endpackage
