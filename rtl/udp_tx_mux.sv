// udp_tx_mux: the MUX in front of TX_FIFO in the UDP path. It merges the
// packets of ACK_REQUEST (input 0) and PACKET_COMPOSE (input 1) into one
// packet stream. Once a packet's SOP word has passed, the multiplexer stays
// on that input until its EOP word, so packets never interleave; between
// packets the input not served last goes first when both wait.
//
// Inputs: packet words with valid/ready. Output: write port of TX_FIFO
// (out_wr, out_word, out_full); a word moves when its input is valid and the
// FIFO is not full. Packet locking and the alternating choice are this
// design's choices.
module udp_tx_mux
  import readout_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [1:0] in_valid,
  input  ustream_t   in_word [2],
  output logic [1:0] in_ready,
  output logic       out_wr,
  output ustream_t   out_word,
  input  logic       out_full
);
  logic locked, sel, last, sel_c;

  always_comb begin
    if (locked)               sel_c = sel;
    else if (in_valid[!last]) sel_c = !last;
    else                      sel_c = last;
    out_word        = in_word[sel_c];
    out_wr          = in_valid[sel_c] && !out_full;
    in_ready        = '0;
    in_ready[sel_c] = !out_full;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0;
      sel    <= 1'b0;
      last   <= 1'b1;
    end else if (out_wr) begin
      sel    <= sel_c;
      locked <= !out_word.eop;
      if (out_word.eop) last <= sel_c;
    end
  end

endmodule
