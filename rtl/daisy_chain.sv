// daisy_chain: the XGMII-level daisy-chain switch of one read-out board, as
// drawn in the paper's arbitration figure.
//
// Transmit towards the server: frames arriving from the upstream board
// (UP_TXD/UP_TXC, delivered by the upstream PCS/PMA) go into Up_eth_fifo,
// frames from this board's TOE (Brd_TXD/Brd_TXC) into Brd_eth_fifo, and the
// arbiter polls the two and sends whole frames out on Down_Txd/Down_Txc to
// the downstream PCS/PMA. Receive from the server: the figure connects
// DOWN_RXD/DOWN_RXC to both the TOE and the upstream PCS/PMA, so every frame
// coming down the chain is offered to this board's TOE (whose MAC keeps only
// its own) and passed on to the boards further up. This fan-out is a wire.
//
// All XGMII buses are taken to run on one 156.25 MHz clock (the PCS/PMA
// cores' shared core clock); that, the FIFO depth and the drop policy are
// this design's choices. One clock of latency through each FIFO write, plus
// one through the arbiter, plus the store-and-forward wait for a whole frame.
module daisy_chain
  import readout_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic        clk,
  input  logic        rst,
  // from the upstream board (UP_PCS/PMA receive side)
  input  logic [63:0] up_txd,
  input  logic [7:0]  up_txc,
  // from this board's TOE MAC
  input  logic [63:0] brd_txd,
  input  logic [7:0]  brd_txc,
  // to the downstream board / server (Down_PCS/PMA transmit side)
  output logic [63:0] down_txd,
  output logic [7:0]  down_txc,
  // from the downstream PCS/PMA receive side
  input  logic [63:0] down_rxd,
  input  logic [7:0]  down_rxc,
  // fan-out of DOWN_RXD/RXC
  output logic [63:0] up_rxd_out,
  output logic [7:0]  up_rxc_out,
  output logic [63:0] toe_rxd,
  output logic [7:0]  toe_rxc,
  // status
  output logic [15:0] up_drops,
  output logic [15:0] brd_drops,
  output logic        grant_pulse,
  output logic        grant_idx
);
  localparam int unsigned FW = $clog2(FIFO_DEPTH) + 1;

  xgmii_word_t      up_in, brd_in;
  xgmii_word_t      q [2];
  logic [FW-1:0]    up_frames, brd_frames;
  logic [1:0]       rd_en, avail;
  logic             up_dropped, brd_dropped;

  assign up_in  = '{c: up_txc,  d: up_txd};
  assign brd_in = '{c: brd_txc, d: brd_txd};

  eth_fifo #(.DEPTH(FIFO_DEPTH)) u_up_eth_fifo (
    .clk, .rst, .wword(up_in), .rd_en(rd_en[0]), .rdata(q[0]),
    .frames(up_frames), .dropped(up_dropped), .drops(up_drops));

  eth_fifo #(.DEPTH(FIFO_DEPTH)) u_brd_eth_fifo (
    .clk, .rst, .wword(brd_in), .rd_en(rd_en[1]), .rdata(q[1]),
    .frames(brd_frames), .dropped(brd_dropped), .drops(brd_drops));

  assign avail = {brd_frames != '0, up_frames != '0};

  daisy_arbiter #(.N(2)) u_arbitration (
    .clk, .rst, .frames_avail(avail), .rd_en, .rdata(q),
    .down_txd, .down_txc, .grant_pulse, .grant_idx);

  assign up_rxd_out = down_rxd;
  assign up_rxc_out = down_rxc;
  assign toe_rxd    = down_rxd;
  assign toe_rxc    = down_rxc;

endmodule
