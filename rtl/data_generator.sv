// data_generator: internal source of TCP payload frames for bandwidth tests.
//
// The paper's bandwidth tests feed the TCP path from a traffic generator
// inside the FPGA whose rate is set from 0 to 10 Gbps, that repeats the same
// payload in every frame, and whose rate is written over UDP in the daisy
// chain test. This block does that with a rate accumulator: every clock
// rate/65536 is added to a fractional word credit, and each whole credit is
// one payload word the generator may hand out. With rate = 65536 it offers a
// word every clock, 64 bit x 156.25 MHz = 10 Gbps. Word w of each frame is
// gen_payload(w) = {w, ~w}, so every frame carries the same payload.
//
// Interface: it looks like the read port of a FIFO. level is the number of
// words credited (saturating at 2*FRAME_WORDS, so an idle sink does not bank
// unbounded credit); rd takes the word on data. The accumulator design, the
// payload pattern and the saturation are this design's choices.
module data_generator #(
  parameter int unsigned FRAME_WORDS = 128,
  parameter int unsigned LEVEL_W     = 10
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               enable,
  input  logic [16:0]        rate,       // words per clock = rate / 65536
  output logic [LEVEL_W-1:0] level,
  input  logic               rd,
  output logic [63:0]        data
);
  localparam int unsigned WW  = $clog2(FRAME_WORDS);
  localparam int unsigned CAP = 2 * FRAME_WORDS;

  logic [15:0]        frac;
  logic [16:0]        sum;
  logic               tick;
  logic [WW-1:0]      widx;
  logic [LEVEL_W-1:0] credit_n, credit_n_q;

  assign sum   = {1'b0, frac} + rate;
  assign tick  = enable && sum[16];
  assign level = enable ? credit_n_q : '0;
  assign data  = readout_pkg::gen_payload(32'(widx));


  always_comb begin
    credit_n = credit_n_q;
    if (rd && credit_n != '0) credit_n = credit_n - 1'b1;
    if (tick && credit_n < LEVEL_W'(CAP)) credit_n = credit_n + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      frac       <= '0;
      credit_n_q <= '0;
      widx       <= '0;
    end else begin
      frac       <= enable ? sum[15:0] : '0;
      credit_n_q <= enable ? credit_n : '0;
      if (rd) widx <= (widx == WW'(FRAME_WORDS - 1)) ? '0 : widx + 1'b1;
    end
  end

endmodule
