// daisy_arbiter: the arbitration module of the daisy chain. It polls its N
// frame FIFOs in turn (round robin, starting after the one served last) and
// forwards one complete XGMII frame at a time onto the downstream XGMII
// transmit bus Down_Txd[63:0] / Down_Txc[7:0], so this board's frames and the
// upstream boards' frames share one 10G link.
//
// A source is eligible when frames_avail is high (its FIFO holds at least one
// committed frame). While a frame is forwarded its FIFO is popped every
// clock and the word is registered onto the output, one clock of latency.
// After the word holding the terminate character the arbiter sends idle
// words: one when that word already carries at least four idle lanes, two
// otherwise, which keeps the inter-frame gap at 12 bytes or more (IEEE 802.3
// minimum). Idle words are sent whenever no source is eligible.
//
// That the two streams are served by one arbiter with polling follows the
// paper (text and arbitration figure, N = 2: Up_eth_fifo and Brd_eth_fifo);
// frame-granular round robin and the gap rule are this design's choices.
module daisy_arbiter
  import readout_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N-1:0]      frames_avail,
  output logic [N-1:0]      rd_en,
  input  xgmii_word_t       rdata [N],
  output logic [63:0]       down_txd,
  output logic [7:0]        down_txc,
  output logic              grant_pulse,   // a frame from grant_idx starts
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant_idx
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);

  typedef enum logic [1:0] {S_IDLE, S_SEND, S_GAP} state_t;
  state_t        state;
  logic [IW-1:0] grant, last;
  logic          found;
  logic [IW-1:0] pick;
  xgmii_word_t   cur;

  // Next eligible source after the last one served.
  always_comb begin
    found = 1'b0;
    pick  = last;
    for (int k = 1; k <= int'(N); k++) begin
      if (!found && frames_avail[(int'(last) + k) % int'(N)]) begin
        found = 1'b1;
        pick  = IW'((int'(last) + k) % int'(N));
      end
    end
  end

  assign cur = rdata[grant];

  always_comb begin
    rd_en = '0;
    if (state == S_SEND) rd_en[grant] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      grant       <= '0;
      last        <= IW'(N - 1);
      down_txd    <= XGMII_IDLE_WORD.d;
      down_txc    <= XGMII_IDLE_WORD.c;
      grant_pulse <= 1'b0;
      grant_idx   <= '0;
    end else begin
      grant_pulse <= 1'b0;
      unique case (state)
        S_IDLE: begin
          down_txd <= XGMII_IDLE_WORD.d;
          down_txc <= XGMII_IDLE_WORD.c;
          if (found) begin
            grant       <= pick;
            state       <= S_SEND;
            grant_pulse <= 1'b1;
            grant_idx   <= pick;
          end
        end
        S_SEND: begin
          down_txd <= cur.d;
          down_txc <= cur.c;
          if (xgmii_has_term(cur)) begin
            last  <= grant;
            state <= (xgmii_term_lane(cur) >= 3'd4) ? S_GAP : S_IDLE;
          end
        end
        S_GAP: begin
          down_txd <= XGMII_IDLE_WORD.d;
          down_txc <= XGMII_IDLE_WORD.c;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
