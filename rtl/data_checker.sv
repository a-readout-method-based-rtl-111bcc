// data_checker: checks TCP payload received from the XTOE core against the
// payload the data generator repeats in every frame, as the receiving board
// does in the paper's maximum-bandwidth test.
//
// Word w of a frame must equal gen_payload(w); w restarts at the word marked
// SOP, and the word marked EOP must be word FRAME_WORDS-1. Every mismatched
// word, and every frame whose EOP comes at the wrong count, adds one to
// errors. words counts all words received. Inputs are the XTOE receive bus
// qualified by valid (TCP words only). The paper names the checker; what it
// compares is this design's choice.
module data_checker #(
  parameter int unsigned FRAME_WORDS = 128
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  input  logic        valid,
  input  logic        sop,
  input  logic        eop,
  input  logic [63:0] data,
  output logic [31:0] words,
  output logic [15:0] errors
);
  logic [31:0] widx, w;
  logic        bad;

  always_comb begin
    w   = sop ? 32'd0 : widx;
    bad = (data != readout_pkg::gen_payload(w)) ||
          (eop && (w != 32'(FRAME_WORDS - 1)));
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      widx   <= '0;
      words  <= '0;
      errors <= '0;
    end else if (valid) begin
      widx  <= w + 1;
      words <= words + 1;
      if (bad && errors != 16'hFFFF) errors <= errors + 1'b1;
    end
  end

endmodule
