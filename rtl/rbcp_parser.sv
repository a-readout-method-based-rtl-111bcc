// rbcp_parser: the RBCP_PARSER of the UDP path. It reads UDP payload words
// from RX_FIFO and turns each RBCP packet into a command (read or write,
// ID, length, start address) for the bus controller, followed for a write
// by the packet's data bytes, one byte per handshake.
//
// The first word of a packet (SOP) is the 8-byte RBCP header. A packet is
// accepted when Ver/Type is 0xFF, CMD/Flag is exactly 0x80 (write) or 0xC0
// (read), Length is not zero and, for a write, data words follow. Anything
// else is discarded up to its EOP and counted in bad_pkts; no reply is sent,
// as for a datagram that is not RBCP. Bytes are taken from DATA[63:56] down,
// as many per word as VALID_BYTES marks (top lanes first). The byte that
// completes Length, or the last byte of the packet if that comes first, is
// flagged wb_last; in the second case wb_short is also set. Surplus bytes
// after Length are skipped.
//
// Handshakes: cmd_valid/cmd_ready, wb_valid/wb_ready (valid held until
// ready). Throughput is one byte per clock, ample for configuration traffic.
// That UDP payloads are parsed into address and data follows the paper; the
// RBCP layout comes from the SiTCP protocol the paper cites, and error
// handling is this design's choice.
module rbcp_parser
  import readout_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // RX_FIFO read port (first-word fall-through)
  input  logic        rx_empty,
  input  ustream_t    rx_word,
  output logic        rx_rd,
  // command to the bus controller
  output logic        cmd_valid,
  output rbcp_cmd_t   cmd,
  input  logic        cmd_ready,
  // write data bytes
  output logic        wb_valid,
  output logic [7:0]  wb_byte,
  output logic        wb_last,
  output logic        wb_short,
  input  logic        wb_ready,
  output logic [15:0] bad_pkts
);
  typedef enum logic [2:0] {S_HDR, S_CMD, S_WLOAD, S_WBYTE, S_SKIP} state_t;
  state_t      state;
  logic [63:0] wbuf;
  logic [3:0]  nbytes;      // valid bytes in wbuf
  logic [2:0]  idx;         // next byte of wbuf
  logic        weop;        // wbuf came with EOP
  logic        hdr_eop;
  logic [7:0]  remaining;   // bytes still owed to Length
  rbcp_hdr_t   h;
  logic        hdr_ok, is_wr, is_rd, more_in_word;

  assign h      = rbcp_hdr_t'(rx_word.data);
  assign is_wr  = (h.cmd_flag == RBCP_CMD_WR);
  assign is_rd  = (h.cmd_flag == RBCP_CMD_RD);
  assign hdr_ok = rx_word.sop && (h.ver_type == RBCP_VER_TYPE) && (h.len != 8'd0) &&
                  (is_rd || (is_wr && !rx_word.eop));

  assign more_in_word = (4'(idx) + 4'd1) < nbytes;

  always_comb begin
    rx_rd     = 1'b0;
    cmd_valid = (state == S_CMD);
    wb_valid  = (state == S_WBYTE);
    wb_byte   = wbuf[63 - 8*idx -: 8];
    wb_last   = (remaining == 8'd1) || (weop && !more_in_word);
    wb_short  = wb_last && (remaining != 8'd1);
    unique case (state)
      S_HDR:   rx_rd = !rx_empty;
      S_WLOAD: rx_rd = !rx_empty;
      S_SKIP:  rx_rd = !rx_empty;
      default: rx_rd = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_HDR;
      cmd       <= '0;
      wbuf      <= '0;
      nbytes    <= '0;
      idx       <= '0;
      weop      <= 1'b0;
      hdr_eop   <= 1'b0;
      remaining <= '0;
      bad_pkts  <= '0;
    end else begin
      unique case (state)
        S_HDR: if (!rx_empty) begin
          hdr_eop <= rx_word.eop;
          if (hdr_ok) begin
            cmd       <= '{is_read: is_rd, id: h.id, len: h.len, addr: h.addr};
            remaining <= h.len;
            state     <= S_CMD;
          end else begin
            bad_pkts <= bad_pkts + 1'b1;
            state    <= rx_word.eop ? S_HDR : S_SKIP;
          end
        end
        S_CMD: if (cmd_ready) begin
          if (!cmd.is_read)  state <= S_WLOAD;
          else if (hdr_eop)  state <= S_HDR;
          else               state <= S_SKIP;
        end
        S_WLOAD: if (!rx_empty) begin
          wbuf   <= rx_word.data;
          nbytes <= count_bytes(rx_word.valid_bytes);
          idx    <= '0;
          weop   <= rx_word.eop;
          state  <= (rx_word.valid_bytes == 8'h00) ? (rx_word.eop ? S_HDR : S_WLOAD) : S_WBYTE;
        end
        S_WBYTE: if (wb_ready) begin
          remaining <= remaining - 1'b1;
          idx       <= idx + 1'b1;
          if (wb_last)            state <= weop ? S_HDR : S_SKIP;
          else if (!more_in_word) state <= S_WLOAD;
        end
        S_SKIP: if (!rx_empty && rx_word.eop) state <= S_HDR;
        default: state <= S_HDR;
      endcase
    end
  end

  a_wb_stable: assert property (@(posedge clk) disable iff (rst)
    (wb_valid && !wb_ready) |=> (wb_valid && $stable(wb_byte)));

endmodule
