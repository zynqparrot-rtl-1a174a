// model_timer: hardware timer that replays host-computed I/O latency.
//
// The DUT issues a request (for example a DRAM read) on req_v in a cycle where
// req_ready is high; the request itself travels to the host through a FIFO
// outside this module. From the next cycle the timer asks for the DUT clock to
// be gated (WAIT_LAT) until the host, having modelled the access, writes the
// latency: lat_v pulses with lat. The DUT then runs (COUNT) while the latency
// counts down in DUT cycles. The host's response waits in its FIFO
// (resp_avail) and is handed to the DUT, resp_pop high, exactly in the lat-th
// DUT cycle after the request cycle. If the count expires first, the timer
// gates the DUT again (WAIT_RESP) until the response arrives and delivers it
// in that same DUT cycle. Either way the DUT sees the modelled latency,
// whatever the host's speed. resp_pop is the DUT's response-valid: the word is
// consumed when resp_pop and clk_en are both high. A latency of 0 is treated
// as 1. One request is outstanding at a time.
//
// The gate request is raised in the very cycle the count expires without a
// response, so the DUT never runs past the cycle the response is due in.
// All registers sit on the ungated DUT clock; the count moves only when
// clk_en is high, the WAIT_LAT and WAIT_RESP transitions also while gated. Reset is
// synchronous and active high.
//
// The stop / program-latency / resume / pause-until-the-right-cycle behaviour
// follows the shell's description of its model timers; the state encoding,
// the single outstanding request and the latency convention are this design's.
module model_timer
  import zp_pkg::*;
#(
  parameter int unsigned LAT_W = 32
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clk_en,
  input  logic             req_v,
  output logic             req_ready,
  input  logic             lat_v,
  input  logic [LAT_W-1:0] lat,
  input  logic             resp_avail,
  output logic             resp_pop,
  output logic             gate_req,
  output timer_state_e     state
);
  logic [LAT_W-1:0] cnt;
  logic             expire;

  assign req_ready = (state == TMR_IDLE);
  assign expire    = (state == TMR_COUNT) && (cnt <= LAT_W'(1));
  assign resp_pop  = resp_avail && (expire || state == TMR_WAIT_RESP);
  assign gate_req  = (state == TMR_WAIT_LAT) ||
                     ((expire || state == TMR_WAIT_RESP) && !resp_avail);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= TMR_IDLE;
      cnt   <= '0;
    end else begin
      unique case (state)
        TMR_IDLE:      if (clk_en && req_v) state <= TMR_WAIT_LAT;
        TMR_WAIT_LAT:  if (lat_v) begin
                         cnt   <= lat;
                         state <= TMR_COUNT;
                       end
        TMR_COUNT:     if (expire && !resp_avail) state <= TMR_WAIT_RESP;
                       else if (clk_en) begin
                         if (expire) state <= TMR_IDLE;
                         else        cnt   <= cnt - 1'b1;
                       end
        TMR_WAIT_RESP: if (clk_en && resp_avail) state <= TMR_IDLE;
        default:       state <= TMR_IDLE;
      endcase
    end
  end

  // The DUT must only consume a response in a cycle where the timer releases it.
  a_pop_only_when_avail: assert property (@(posedge clk) disable iff (rst) resp_pop |-> resp_avail);
endmodule
