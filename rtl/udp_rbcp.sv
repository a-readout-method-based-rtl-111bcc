// udp_rbcp: the UDP register-access path of the read-out board, as laid out
// in the paper's UDP parsing figure: RX_FIFO -> RBCP_PARSER -> DMAC -> (bus
// to the registers) and DMAC -> ACK_REQUEST / PACKET_COMPOSE -> MUX ->
// TX_FIFO -> UOE.
//
// Receive: the XTOE core delivers TCP and UDP payload on one user bus with
// the same SOP/EOP/write timing, told apart by a flag (rx_udp); words with
// the flag set are written into RX_FIFO. A word that finds RX_FIFO full is
// lost and counted in rx_overflows. Transmit: replies are buffered in
// TX_FIFO, and a reply goes to the UOE transmit bus as one gap-free burst
// (uoe_write with SOP on the first and EOP on the last word, the XTOE timing)
// only once its EOP word is in TX_FIFO and uoe_tx_afull is low. Addressing of
// the reply datagram (back to the sender) is left to the UOE core.
//
// Everything runs on the 156.25 MHz XTOE user clock. FIFO depths, the
// separate UOE transmit port and the whole-packet rule are this design's
// choices.
module udp_rbcp
  import readout_pkg::*;
#(
  parameter int unsigned RX_DEPTH   = 64,
  parameter int unsigned TX_DEPTH   = 64,
  parameter int unsigned ADDR_BYTES = 4 * NREGS
) (
  input  logic        clk,
  input  logic        rst,
  // XTOE/UOE receive user bus
  input  logic        rx_valid,
  input  logic        rx_udp,
  input  logic        rx_sop,
  input  logic        rx_eop,
  input  logic [63:0] rx_data,
  input  logic [7:0]  rx_valid_bytes,
  // UOE transmit user bus
  input  logic        uoe_tx_afull,
  output logic        uoe_write,
  output logic        uoe_tx_sop,
  output logic        uoe_tx_eop,
  output logic [63:0] uoe_tx_data,
  output logic [7:0]  uoe_tx_valid_bytes,
  // register bus (ADDR / DATA)
  output logic [31:0] bus_addr,
  output logic [7:0]  bus_wdata,
  output logic        bus_we,
  output logic        bus_re,
  input  logic [7:0]  bus_rdata,
  // status
  output logic [15:0] bad_pkts,
  output logic [15:0] rx_overflows,
  output logic [15:0] acks_sent,
  output logic [15:0] replies_sent
);
  localparam int unsigned TW = $clog2(TX_DEPTH) + 1;

  // ---------------- RX_FIFO ----------------
  ustream_t rx_in, rx_head;
  logic     rx_full, rx_empty, rx_rd;
  assign rx_in = '{sop: rx_sop, eop: rx_eop, valid_bytes: rx_valid_bytes, data: rx_data};

  sync_fifo #(.WIDTH($bits(ustream_t)), .DEPTH(RX_DEPTH)) u_rx_fifo (
    .clk, .rst, .wr_en(rx_valid && rx_udp), .wdata(rx_in), .full(rx_full),
    .rd_en(rx_rd), .rdata(rx_head), .empty(rx_empty), .count());

  always_ff @(posedge clk) begin
    if (rst) rx_overflows <= '0;
    else if (rx_valid && rx_udp && rx_full) rx_overflows <= rx_overflows + 1'b1;
  end

  // ---------------- RBCP_PARSER ----------------
  logic       cmd_valid, cmd_ready, wb_valid, wb_last, wb_short, wb_ready;
  rbcp_cmd_t  cmd;
  logic [7:0] wb_byte;

  rbcp_parser u_rbcp_parser (
    .clk, .rst, .rx_empty, .rx_word(rx_head), .rx_rd,
    .cmd_valid, .cmd, .cmd_ready,
    .wb_valid, .wb_byte, .wb_last, .wb_short, .wb_ready, .bad_pkts);

  // ---------------- DMAC ----------------
  logic        ack_valid, ack_ready, rs_valid, rs_ready, rb_valid, rb_last, rb_ready;
  rbcp_reply_t ack, rs;
  logic [7:0]  rb_byte;

  dmac #(.ADDR_BYTES(ADDR_BYTES)) u_dmac (
    .clk, .rst, .cmd_valid, .cmd, .cmd_ready,
    .wb_valid, .wb_byte, .wb_last, .wb_short, .wb_ready,
    .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata,
    .ack_valid, .ack, .ack_ready,
    .rd_start_valid(rs_valid), .rd_start(rs), .rd_start_ready(rs_ready),
    .rb_valid, .rb_byte, .rb_last, .rb_ready);

  // ---------------- ACK_REQUEST / PACKET_COMPOSE ----------------
  logic [1:0] m_valid, m_ready;
  ustream_t   m_word [2];

  ack_request u_ack_request (
    .clk, .rst, .ack_valid, .ack, .ack_ready,
    .out_valid(m_valid[0]), .out_word(m_word[0]), .out_ready(m_ready[0]), .acks_sent);

  packet_compose u_packet_compose (
    .clk, .rst, .start_valid(rs_valid), .start(rs), .start_ready(rs_ready),
    .rb_valid, .rb_byte, .rb_last, .rb_ready,
    .out_valid(m_valid[1]), .out_word(m_word[1]), .out_ready(m_ready[1]), .replies_sent);

  // ---------------- MUX -> TX_FIFO ----------------
  logic     tx_wr, tx_full, tx_empty, tx_rd;
  ustream_t tx_in, tx_head;

  udp_tx_mux u_mux (
    .clk, .rst, .in_valid(m_valid), .in_word(m_word), .in_ready(m_ready),
    .out_wr(tx_wr), .out_word(tx_in), .out_full(tx_full));

  sync_fifo #(.WIDTH($bits(ustream_t)), .DEPTH(TX_DEPTH)) u_tx_fifo (
    .clk, .rst, .wr_en(tx_wr), .wdata(tx_in), .full(tx_full),
    .rd_en(tx_rd), .rdata(tx_head), .empty(tx_empty), .count());

  // ---------------- TX_FIFO -> UOE, one burst per packet ----------------
  logic [TW-1:0] tx_pkts;
  logic          sending, tx_eop_in, tx_eop_out;

  assign tx_rd      = sending && !tx_empty;
  assign tx_eop_in  = tx_wr && tx_in.eop;
  assign tx_eop_out = tx_rd && tx_head.eop;

  always_ff @(posedge clk) begin
    if (rst) begin
      tx_pkts            <= '0;
      sending            <= 1'b0;
      uoe_write          <= 1'b0;
      uoe_tx_sop         <= 1'b0;
      uoe_tx_eop         <= 1'b0;
      uoe_tx_data        <= '0;
      uoe_tx_valid_bytes <= '0;
    end else begin
      tx_pkts <= tx_pkts + TW'(tx_eop_in) - TW'(tx_eop_out);
      if (!sending && tx_pkts != '0 && !uoe_tx_afull) sending <= 1'b1;
      else if (tx_eop_out)                            sending <= 1'b0;
      uoe_write          <= tx_rd;
      uoe_tx_sop         <= tx_rd && tx_head.sop;
      uoe_tx_eop         <= tx_eop_out;
      uoe_tx_data        <= tx_head.data;
      uoe_tx_valid_bytes <= tx_head.valid_bytes;
    end
  end

endmodule
