// ack_request: the ACK_REQUEST block of the UDP path. For every write
// command, and for every command refused with a bus error, it builds the
// one-word RBCP acknowledge packet: the 8-byte header with the ACK flag,
// the command's ID and address, Length = bytes actually written, and the
// bus-error flag when set. The packet is a single user-stream word with SOP
// and EOP both set and all eight bytes valid.
//
// Input: a reply descriptor with valid/ready. Output: one packet word with
// valid/ready towards the multiplexer; one descriptor is held at a time.
// Reply format from RBCP; the split of replies between this block and
// PACKET_COMPOSE is this design's reading of the figure.
module ack_request
  import readout_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        ack_valid,
  input  rbcp_reply_t ack,
  output logic        ack_ready,
  output logic        out_valid,
  output ustream_t    out_word,
  input  logic        out_ready,
  output logic [15:0] acks_sent
);
  assign ack_ready = !out_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_word  <= '0;
      acks_sent <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (ack_valid && ack_ready) begin
        out_valid <= 1'b1;
        out_word  <= '{sop: 1'b1, eop: 1'b1, valid_bytes: 8'hFF, data: rbcp_reply_header(ack)};
        acks_sent <= acks_sent + 1'b1;
      end
    end
  end

endmodule
