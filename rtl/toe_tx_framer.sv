// toe_tx_framer: sends TCP payload frames to the XTOE user transmit interface.
//
// The XTOE core takes a frame as one gap-free burst: TOE_WRITE is high for
// every word, TOE_TX_SOP marks the first word and TOE_TX_EOP the last, and
// TOE_TX_DATA[63:0] / TOE_TX_VALID_BYTES[7:0] are valid under TOE_WRITE (the
// paper's XTOE TCP timing figure and the text beside it). Because the burst
// may not pause, the framer starts a frame only when the source already holds
// all FRAME_WORDS words of it (src_level), and only when the core has room
// (toe_tx_afull low). It then reads one word per clock and registers it onto
// the XTOE bus, so the outputs follow the source read by one clock.
// At least one idle clock separates two frames.
//
// Source: a first-word-fall-through FIFO read port (src_data is the head,
// src_rd pops it). Every word is a full 8-byte word (VALID_BYTES = 8'hFF).
// TOE_TX_STR is printed in the timing figure without a level change and its
// meaning is not given; it is held low. The fixed frame length, the
// almost-full input and the gap between frames are this design's choices.
module toe_tx_framer #(
  parameter int unsigned FRAME_WORDS = 128,
  parameter int unsigned LEVEL_W     = 10
) (
  input  logic               clk,            // 156.25 MHz XTOE user clock
  input  logic               rst,
  input  logic [LEVEL_W-1:0] src_level,
  output logic               src_rd,
  input  logic [63:0]        src_data,
  input  logic               toe_tx_afull,
  output logic               toe_write,
  output logic               toe_tx_sop,
  output logic               toe_tx_eop,
  output logic [63:0]        toe_tx_data,
  output logic               toe_tx_str,
  output logic [7:0]         toe_tx_valid_bytes,
  output logic [31:0]        frames_sent
);
  localparam int unsigned CW = $clog2(FRAME_WORDS + 1);

  typedef enum logic {S_IDLE, S_BURST} state_t;
  state_t        state;
  logic [CW-1:0] cnt;

  assign src_rd = (state == S_BURST);

  always_ff @(posedge clk) begin
    if (rst) begin
      state              <= S_IDLE;
      cnt                <= '0;
      toe_write          <= 1'b0;
      toe_tx_sop         <= 1'b0;
      toe_tx_eop         <= 1'b0;
      toe_tx_data        <= '0;
      toe_tx_valid_bytes <= '0;
      frames_sent        <= '0;
    end else begin
      toe_write  <= 1'b0;
      toe_tx_sop <= 1'b0;
      toe_tx_eop <= 1'b0;
      unique case (state)
        S_IDLE: begin
          cnt <= '0;
          if (src_level >= LEVEL_W'(FRAME_WORDS) && !toe_tx_afull) state <= S_BURST;
        end
        S_BURST: begin
          toe_write          <= 1'b1;
          toe_tx_sop         <= (cnt == '0);
          toe_tx_eop         <= (cnt == CW'(FRAME_WORDS - 1));
          toe_tx_data        <= src_data;
          toe_tx_valid_bytes <= 8'hFF;
          cnt                <= cnt + 1'b1;
          if (cnt == CW'(FRAME_WORDS - 1)) begin
            state       <= S_IDLE;
            frames_sent <= frames_sent + 1;
          end
        end
      endcase
    end
  end

  assign toe_tx_str = 1'b0;

  // SOP and EOP only ever come with TOE_WRITE.
  a_sop_eop_under_write: assert property (@(posedge clk) disable iff (rst)
    (toe_tx_sop || toe_tx_eop) |-> toe_write);

endmodule
