// sync_fifo: single-clock first-word-fall-through FIFO. It is used as the
// RX_FIFO between the UDP engine's receive interface and the RBCP parser, and
// as the TX_FIFO between the reply multiplexer and the UDP engine's transmit
// interface (both drawn in the paper's UDP parsing figure, which gives no
// more than their names).
//
// rdata shows the head word whenever empty is low; rd_en pops it in the same
// cycle. wr_en is ignored when full, rd_en when empty. count is the number of
// words held. Synchronous active-high reset empties it. Width, depth and the
// fall-through read are this design's choices.
module sync_fifo #(
  parameter int unsigned WIDTH = 74,
  parameter int unsigned DEPTH = 64       // power of two
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   wr_en,
  input  logic [WIDTH-1:0]       wdata,
  output logic                   full,
  input  logic                   rd_en,
  output logic [WIDTH-1:0]       rdata,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;
  logic             push, pop;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign push  = wr_en && !full;
  assign pop   = rd_en && !empty;
  assign rdata = mem[rptr[AW-1:0]];
  assign count = wptr - rptr;

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      wptr <= wptr + (AW+1)'(push);
      rptr <= rptr + (AW+1)'(pop);
    end
  end

endmodule
