// packet_compose: the PACKET_COMPOSE block of the UDP path. It builds the
// reply to an RBCP read: first the 8-byte header (ACK flag, ID, Length,
// address) as the SOP word, then the bytes read back from the registers,
// packed eight to a word from DATA[63:56] down; the word holding the last
// byte carries EOP and a VALID_BYTES mask of its filled (top) lanes.
//
// Inputs: a start descriptor (valid/ready) and a byte stream
// (valid/ready/last) from the bus controller. Output: packet words with
// valid/ready towards the multiplexer. A byte is taken only while no
// output word is waiting. The read-back reply is the paper's; the packing
// is this design's choice.
module packet_compose
  import readout_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start_valid,
  input  rbcp_reply_t start,
  output logic        start_ready,
  input  logic        rb_valid,
  input  logic [7:0]  rb_byte,
  input  logic        rb_last,
  output logic        rb_ready,
  output logic        out_valid,
  output ustream_t    out_word,
  input  logic        out_ready,
  output logic [15:0] replies_sent
);
  typedef enum logic {S_IDLE, S_DATA} state_t;
  state_t      state;
  logic [63:0] buf_q, buf_n;
  logic [2:0]  n;            // bytes already in buf_q

  assign start_ready = (state == S_IDLE) && !out_valid;
  assign rb_ready    = (state == S_DATA) && !out_valid;

  always_comb begin
    buf_n = buf_q;
    buf_n[63 - 8*n -: 8] = rb_byte;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= S_IDLE;
      buf_q        <= '0;
      n            <= '0;
      out_valid    <= 1'b0;
      out_word     <= '0;
      replies_sent <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start_valid && start_ready) begin
          out_valid <= 1'b1;
          out_word  <= '{sop: 1'b1, eop: 1'b0, valid_bytes: 8'hFF, data: rbcp_reply_header(start)};
          buf_q     <= '0;
          n         <= '0;
          state     <= S_DATA;
        end
        S_DATA: if (rb_valid && rb_ready) begin
          if (rb_last || n == 3'd7) begin
            out_valid <= 1'b1;
            out_word  <= '{sop: 1'b0, eop: rb_last,
                           valid_bytes: ~(8'hFF >> (4'(n) + 4'd1)), data: buf_n};
            buf_q     <= '0;
            n         <= '0;
            if (rb_last) begin
              state        <= S_IDLE;
              replies_sent <= replies_sent + 1'b1;
            end
          end else begin
            buf_q <= buf_n;
            n     <= n + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
