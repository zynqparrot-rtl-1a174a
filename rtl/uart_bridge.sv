// uart_bridge: carries host GP0 accesses over a serial line on FPGAs that
// have no hard CPU, presenting them to the shell as a "pseudo-GP0" master.
//
// The bridge is an AXI4-Lite master on two sides. On one side it polls a
// standard 16550-style UART register block (RBR/THR at +0x00, LSR at +0x14,
// 32-bit register spacing, LSR bit 0 = receive data ready, bit 5 = transmit
// holding register empty) placed at UART_BASE. On the other it drives the
// shell's GP0 slave port.
//
// The UART FSM loops: read LSR; if a response byte is waiting to go out and
// the transmitter is empty, write it to THR; else if a byte has arrived, read
// it from RBR into the PISO, which gathers command bytes; else poll again.
// Command format, little-endian: one opcode byte (bit 0 set = write), four
// address bytes, and for a write four data bytes. A complete write command is
// issued from the CMD register as an AW+W pair and its B response is absorbed;
// nothing is sent back. A complete read command is issued as an AR; the R data
// is held in the RESP register and the SIPO sends it back as four bytes,
// least significant first. Commands are handled one at a time and in order.
// Because the shell answers every access in bounded time, so does the bridge.
// Some output bits are constant by construction: wstrb is always all ones,
// THR writes carry the byte in wdata[7:0] with zeros above, and the UART
// addresses differ only in the register offset.
//
// Clock and reset: one clock; synchronous, active-high reset.
//
// The tunnelling of GP0 writes and reads through UART RX/TX, the two masters
// and the CMD/RESP/PISO/SIPO/UART FSM partition follow the shell's bridge
// diagram; the byte format and the register offsets are this design's
// (the offsets are those of the common 16550 register map).
module uart_bridge
  import zp_pkg::*;
#(
  parameter logic [31:0] UART_BASE = 32'h0000_1000
) (
  input  logic      clk,
  input  logic      rst,
  output axil_req_t m_uart_req,
  input  axil_rsp_t m_uart_rsp,
  output axil_req_t m_gp0_req,
  input  axil_rsp_t m_gp0_rsp
);
  localparam logic [31:0] REG_RBR_THR = UART_BASE + 32'h00;
  localparam logic [31:0] REG_LSR     = UART_BASE + 32'h14;

  typedef enum logic [2:0] {
    S_POLL,    // read LSR
    S_RX,      // read RBR
    S_TX,      // write THR
    S_GP_WR,   // write on pseudo-GP0
    S_GP_RD    // read on pseudo-GP0
  } state_e;

  state_e state;

  // PISO: command bytes gathered here; CMD: the decoded command
  logic [7:0]  piso [9];
  logic [3:0]  piso_cnt;
  logic [3:0]  cmd_len;
  logic [31:0] cmd_addr, cmd_data;

  // RESP / SIPO: read data waiting to go out
  logic [31:0] sipo;
  logic [2:0]  sipo_cnt;

  // Per-transaction handshake progress
  logic aw_done, w_done, ar_done;

  assign cmd_len  = piso[0][0] ? 4'd9 : 4'd5;
  assign cmd_addr = {piso[4], piso[3], piso[2], piso[1]};
  assign cmd_data = {piso[8], piso[7], piso[6], piso[5]};

  // ---------------------------------------------------------------- masters
  always_comb begin
    m_uart_req = '0;
    m_gp0_req  = '0;
    m_uart_req.wstrb = 4'hF;
    m_gp0_req.wstrb  = 4'hF;
    unique case (state)
      S_POLL, S_RX: begin
        m_uart_req.araddr  = (state == S_POLL) ? REG_LSR : REG_RBR_THR;
        m_uart_req.arvalid = !ar_done;
        m_uart_req.rready  = ar_done;
      end
      S_TX: begin
        m_uart_req.awaddr  = REG_RBR_THR;
        m_uart_req.awvalid = !aw_done;
        m_uart_req.wdata   = {24'h0, sipo[7:0]};
        m_uart_req.wvalid  = !w_done;
        m_uart_req.bready  = aw_done && w_done;
      end
      S_GP_WR: begin
        m_gp0_req.awaddr  = cmd_addr;
        m_gp0_req.awvalid = !aw_done;
        m_gp0_req.wdata   = cmd_data;
        m_gp0_req.wvalid  = !w_done;
        m_gp0_req.bready  = aw_done && w_done;
      end
      S_GP_RD: begin
        m_gp0_req.araddr  = cmd_addr;
        m_gp0_req.arvalid = !ar_done;
        m_gp0_req.rready  = ar_done;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- UART FSM
  logic uart_r, uart_b, gp0_r, gp0_b;
  assign uart_r = ar_done && m_uart_rsp.rvalid;
  assign uart_b = aw_done && w_done && m_uart_rsp.bvalid;
  assign gp0_r  = ar_done && m_gp0_rsp.rvalid;
  assign gp0_b  = aw_done && w_done && m_gp0_rsp.bvalid;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_POLL;
      piso_cnt <= '0;
      sipo     <= '0;
      sipo_cnt <= '0;
      aw_done  <= 1'b0;
      w_done   <= 1'b0;
      ar_done  <= 1'b0;
      for (int i = 0; i < 9; i++) piso[i] <= '0;
    end else begin
      // address/data phase bookkeeping, shared by every state
      unique case (state)
        S_POLL, S_RX: if (m_uart_req.arvalid && m_uart_rsp.arready) ar_done <= 1'b1;
        S_TX: begin
          if (m_uart_req.awvalid && m_uart_rsp.awready) aw_done <= 1'b1;
          if (m_uart_req.wvalid  && m_uart_rsp.wready)  w_done  <= 1'b1;
        end
        S_GP_WR: begin
          if (m_gp0_req.awvalid && m_gp0_rsp.awready) aw_done <= 1'b1;
          if (m_gp0_req.wvalid  && m_gp0_rsp.wready)  w_done  <= 1'b1;
        end
        S_GP_RD: if (m_gp0_req.arvalid && m_gp0_rsp.arready) ar_done <= 1'b1;
        default: ;
      endcase

      unique case (state)
        S_POLL: if (uart_r) begin
          ar_done <= 1'b0;
          if (sipo_cnt != 0 && m_uart_rsp.rdata[5]) state <= S_TX;
          else if (m_uart_rsp.rdata[0])             state <= S_RX;
        end
        S_RX: if (uart_r) begin
          ar_done        <= 1'b0;
          piso[piso_cnt] <= m_uart_rsp.rdata[7:0];
          // length is known once the opcode byte is in
          if ((piso_cnt != 0) && (piso_cnt + 1'b1 == cmd_len)) begin
            piso_cnt <= '0;
            state    <= cmd_len == 4'd9 ? S_GP_WR : S_GP_RD;
          end else begin
            piso_cnt <= piso_cnt + 1'b1;
            state    <= S_POLL;
          end
        end
        S_TX: if (uart_b) begin
          aw_done  <= 1'b0;
          w_done   <= 1'b0;
          sipo     <= sipo >> 8;
          sipo_cnt <= sipo_cnt - 1'b1;
          state    <= S_POLL;
        end
        S_GP_WR: if (gp0_b) begin
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          state   <= S_POLL;
        end
        S_GP_RD: if (gp0_r) begin
          ar_done  <= 1'b0;
          sipo     <= m_gp0_rsp.rdata;
          sipo_cnt <= 3'd4;
          state    <= S_POLL;
        end
        default: state <= S_POLL;
      endcase
    end
  end
endmodule
