// uart16550_model: behavioural stand-in for a 16550-style UART register block
// behind an AXI4-Lite slave port, for testbenches only. Bytes queued with
// send_byte() appear in RBR with LSR bit 0 set; bytes written to THR are
// collected in tx_q, and LSR bit 5 (transmitter empty) drops for a few cycles
// after each write as a real transmitter would. Registers sit at BASE+0x00
// (RBR/THR) and BASE+0x14 (LSR). Responses come after a short random delay.
module uart16550_model
  import zp_pkg::*;
#(
  parameter logic [31:0] BASE = 32'h0000_1000
) (
  input  logic      clk,
  input  logic      rst,
  input  axil_req_t req,
  output axil_rsp_t rsp
);
  logic [7:0] rx_q[$];
  logic [7:0] tx_q[$];
  int busy = 0;
  bit aw_seen = 0, w_seen = 0, ar_seen = 0;
  logic [31:0] aw_a, w_d, ar_a;
  logic        bvalid_q = 0, rvalid_q = 0;
  logic [31:0] rdata_q = '0;

  function automatic void send_byte(logic [7:0] b);
    rx_q.push_back(b);
  endfunction

  always_comb begin
    rsp = '0;
    rsp.awready = !aw_seen;
    rsp.wready  = !w_seen;
    rsp.arready = !ar_seen;
    rsp.bvalid  = bvalid_q;
    rsp.rvalid  = rvalid_q;
    rsp.rdata   = rdata_q;
  end

  always @(posedge clk) begin
    if (rst) begin
      aw_seen <= 0; w_seen <= 0; ar_seen <= 0;
      bvalid_q <= 0; rvalid_q <= 0;
    end else begin
      if (busy > 0) busy <= busy - 1;
      if (req.awvalid && !aw_seen) begin aw_seen <= 1; aw_a <= req.awaddr; end
      if (req.wvalid && !w_seen)   begin w_seen  <= 1; w_d  <= req.wdata;  end
      if (aw_seen && w_seen && !bvalid_q && ($urandom % 2 == 0)) begin
        if (aw_a == BASE) begin
          tx_q.push_back(w_d[7:0]);
          busy <= 6;
        end
        bvalid_q <= 1;
      end
      if (bvalid_q && req.bready) begin
        bvalid_q <= 0; aw_seen <= 0; w_seen <= 0;
      end
      if (req.arvalid && !ar_seen) begin ar_seen <= 1; ar_a <= req.araddr; end
      if (ar_seen && !rvalid_q && ($urandom % 2 == 0)) begin
        rvalid_q <= 1;
        if (ar_a == BASE + 32'h14)
          rdata_q <= {26'h0, busy == 0, 4'h0, rx_q.size() > 0};
        else if (ar_a == BASE) begin
          rdata_q <= (rx_q.size() > 0) ? {24'h0, rx_q.pop_front()} : 32'h0;
        end else
          rdata_q <= 32'h0;
      end
      if (rvalid_q && req.rready) begin
        rvalid_q <= 0; ar_seen <= 0;
      end
    end
  end
endmodule
