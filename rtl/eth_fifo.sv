// eth_fifo: store-and-forward XGMII frame FIFO, 72 bits wide ({TXC, TXD}),
// placed in front of the daisy-chain arbiter: one instance (Up_eth_fifo)
// holds frames arriving from the upstream board, the other (Brd_eth_fifo)
// frames from this board's TOE.
//
// Only frame words are stored: a word with a start character in lane 0 opens
// a frame and the word holding the terminate character closes it; idle words
// between frames are not stored (the arbiter makes its own gaps). A frame
// becomes visible to the reader only once its terminate word is written
// (commit pointer), so the arbiter can forward it without underrun. If the
// FIFO fills while a frame is being written, the partial frame is discarded
// by rewinding the write pointer to the commit pointer, the rest of that
// frame is skipped up to its terminate, and dropped pulses (drops counts it).
// A start seen inside a frame (missing terminate) also discards the partial
// frame and opens the new one.
//
// XGMII has no back-pressure, so dropping is the only choice on overflow; the
// TCP sender's retransmission recovers the frame. Read port: first-word
// fall-through, rd_en pops the head; frames counts complete frames held.
// The 72-bit width follows the paper's arbitration figure; depth, framing
// and drop policy are this design's choices. Frames are assumed to start in
// lane 0.
module eth_fifo
  import readout_pkg::*;
#(
  parameter int unsigned DEPTH = 512          // power of two, words
) (
  input  logic                   clk,
  input  logic                   rst,
  input  xgmii_word_t            wword,
  input  logic                   rd_en,
  output xgmii_word_t            rdata,
  output logic [$clog2(DEPTH):0] frames,
  output logic                   dropped,
  output logic [15:0]            drops
);
  localparam int unsigned AW = $clog2(DEPTH);

  xgmii_word_t mem [DEPTH];
  logic [AW:0] wptr, cptr, rptr;
  logic        in_frame, skipping;
  logic        full, wr, start, term;
  logic        pop, pop_term, commit;

  assign full     = ((wptr - rptr) == (AW+1)'(DEPTH));
  assign start    = xgmii_is_start(wword);
  assign term     = xgmii_has_term(wword);
  assign pop      = rd_en && (rptr != cptr);
  assign pop_term = pop && xgmii_has_term(rdata);
  assign rdata    = mem[rptr[AW-1:0]];

  // Write strobe and commit: computed from the state before this word.
  always_comb begin
    wr     = 1'b0;
    commit = 1'b0;
    if (start) begin
      // A new frame always starts at the commit pointer (see below).
      wr     = ((cptr - rptr) != (AW+1)'(DEPTH));
      commit = wr && term;
    end else if (in_frame && !full) begin
      wr     = 1'b1;
      commit = term;
    end
  end

  always_ff @(posedge clk) begin
    if (wr) mem[start ? cptr[AW-1:0] : wptr[AW-1:0]] <= wword;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr     <= '0;
      cptr     <= '0;
      rptr     <= '0;
      in_frame <= 1'b0;
      skipping <= 1'b0;
      frames   <= '0;
      dropped  <= 1'b0;
      drops    <= '0;
    end else begin
      dropped <= 1'b0;
      if (pop) rptr <= rptr + 1'b1;
      frames <= frames + (AW+1)'(commit) - (AW+1)'(pop_term);

      if (start) begin
        // A frame cut short by a new start is discarded.
        if (in_frame) begin
          dropped <= 1'b1;
          drops   <= drops + 1'b1;
        end
        skipping <= !wr && !term;
        in_frame <= wr && !term;
        wptr     <= wr ? cptr + 1'b1 : cptr;
        if (commit) cptr <= cptr + 1'b1;
        if (!wr) begin
          dropped <= 1'b1;
          drops   <= drops + 1'b1;
        end
      end else if (in_frame) begin
        if (full) begin
          wptr     <= cptr;
          in_frame <= 1'b0;
          skipping <= !term;
          dropped  <= 1'b1;
          drops    <= drops + 1'b1;
        end else begin
          wptr <= wptr + 1'b1;
          if (term) begin
            cptr     <= wptr + 1'b1;
            in_frame <= 1'b0;
          end
        end
      end else if (skipping && term) begin
        skipping <= 1'b0;
      end
    end
  end

endmodule
