// readout_top: user logic of one read-out board of the silicon pixel
// detector. It sits between the vendor cores of the FPGA (the XTOE TCP/UDP
// offload engine with its 10G MAC, the 10GBASE-R PCS/PMA cores and the DDR3
// cache behind its FIFO adapter), whose user-side signals are this module's
// ports, and joins them into the paper's firmware structure:
//
//  * TCP path: detector data read out of the DDR3 cache (80 MHz user clock)
//    crosses into the 156.25 MHz XTOE clock through async_fifo; toe_tx_framer
//    sends it to the XTOE core in gap-free SOP..EOP bursts. A register bit
//    switches the source to data_generator, the internal traffic source of
//    the bandwidth tests, whose rate is another register.
//  * UDP path: udp_rbcp parses RBCP register commands arriving over UDP,
//    drives the register bus of reg_control (REGX8) and returns acknowledges
//    and read-back replies. The registers drive the BPIX configuration and
//    trigger setting outputs.
//  * Daisy chain: daisy_chain merges this board's XGMII frames (from the
//    TOE MAC) with the frames of the upstream board and sends both towards
//    the server; frames from the server are fanned out to the TOE and the
//    upstream board.
//  * Test logic: data_checker and throughput_meter watch the TCP payload
//    received from the XTOE core (the receiving board of the paper's
//    maximum-bandwidth test); the 100 us byte count is register 6.
//
// Register map (32-bit, byte address 4*k): 0 control ([0] generator enable,
// [1] source 1=generator 0=DDR3, [2] clear checker), 1 generator rate
// (words/clock = value/65536), 2 GDAC, 3 chain, 4 array, 5 trigger setting,
// 6 throughput (read only), 7 status (read only: {checker errors[15:0],
// upstream drops[7:0], board drops[7:0]}).
//
// Clocks: clk_user (80 MHz, DDR3 side) and clk_xtoe (156.25 MHz, XTOE user
// interface and all XGMII buses). Resets are synchronous, active high, one
// per domain, asserted together. The BPIX and trigger outputs are in the
// clk_xtoe domain; they are static configuration and the consumer
// synchronises them.
module readout_top
  import readout_pkg::*;
#(
  parameter int unsigned FRAME_WORDS   = 128,
  parameter int unsigned CDC_DEPTH     = 512,
  parameter int unsigned ETH_DEPTH     = 512,
  parameter int unsigned WINDOW_CYCLES = 15625
) (
  input  logic        clk_user,
  input  logic        rst_user,
  input  logic        clk_xtoe,
  input  logic        rst_xtoe,
  // DDR3 cache, FIFO read side (clk_user)
  input  logic        ddr_rd_valid,
  input  logic [63:0] ddr_rd_data,
  output logic        ddr_rd_ready,
  // XTOE TCP transmit user interface
  input  logic        toe_tx_afull,
  output logic        toe_write,
  output logic        toe_tx_sop,
  output logic        toe_tx_eop,
  output logic [63:0] toe_tx_data,
  output logic        toe_tx_str,
  output logic [7:0]  toe_tx_valid_bytes,
  // XTOE receive user interface (TCP and UDP, told apart by rx_udp)
  input  logic        toe_rx_valid,
  input  logic        toe_rx_udp,
  input  logic        toe_rx_sop,
  input  logic        toe_rx_eop,
  input  logic [63:0] toe_rx_data,
  input  logic [7:0]  toe_rx_valid_bytes,
  // UOE transmit user interface
  input  logic        uoe_tx_afull,
  output logic        uoe_write,
  output logic        uoe_tx_sop,
  output logic        uoe_tx_eop,
  output logic [63:0] uoe_tx_data,
  output logic [7:0]  uoe_tx_valid_bytes,
  // XGMII
  input  logic [63:0] brd_txd,        // from the TOE MAC
  input  logic [7:0]  brd_txc,
  input  logic [63:0] up_txd,         // from UP_PCS/PMA (upstream board)
  input  logic [7:0]  up_txc,
  output logic [63:0] down_txd,       // to Down_PCS/PMA
  output logic [7:0]  down_txc,
  input  logic [63:0] down_rxd,       // from Down_PCS/PMA
  input  logic [7:0]  down_rxc,
  output logic [63:0] up_rxd_out,     // to UP_PCS/PMA
  output logic [7:0]  up_rxc_out,
  output logic [63:0] toe_xgmii_rxd,  // to the TOE MAC
  output logic [7:0]  toe_xgmii_rxc,
  // configuration outputs (BPIX, fast control)
  output logic [31:0] bpix_gdac,
  output logic [31:0] bpix_chain,
  output logic [31:0] bpix_array,
  output logic [31:0] trig_setting,
  // status
  output logic [31:0] tcp_frames_sent,
  output logic [31:0] rx_bytes_per_window,
  output logic        rx_window_tick,
  output logic [15:0] checker_errors,
  output logic [31:0] checker_words,
  output logic [15:0] udp_bad_pkts,
  output logic [15:0] udp_rx_overflows,
  output logic [15:0] udp_acks,
  output logic [15:0] udp_replies,
  output logic [15:0] up_drops,
  output logic [15:0] brd_drops,
  output logic        arb_grant_pulse,
  output logic        arb_grant_idx
);
  localparam int unsigned LW = $clog2(CDC_DEPTH) + 1;

  logic [31:0] regs [NREGS];
  logic [31:0] ro_value [NREGS];

  logic gen_enable, src_gen, chk_clear;
  assign gen_enable = regs[REG_CTRL][0];
  assign src_gen    = regs[REG_CTRL][1];
  assign chk_clear  = regs[REG_CTRL][2];

  // ---------------- TCP path ----------------
  logic          cdc_full, cdc_empty, cdc_rd;
  logic [63:0]   cdc_data;
  logic [LW-1:0] cdc_level;

  assign ddr_rd_ready = !cdc_full;

  async_fifo #(.WIDTH(64), .DEPTH(CDC_DEPTH)) u_cdc_fifo (
    .wclk(clk_user), .wrst(rst_user), .wr_en(ddr_rd_valid), .wdata(ddr_rd_data), .full(cdc_full),
    .rclk(clk_xtoe), .rrst(rst_xtoe), .rd_en(cdc_rd), .rdata(cdc_data), .empty(cdc_empty),
    .rlevel(cdc_level));

  logic [LW-1:0] gen_level, src_level;
  logic [63:0]   gen_data, src_data;
  logic          gen_rd, src_rd;

  data_generator #(.FRAME_WORDS(FRAME_WORDS), .LEVEL_W(LW)) u_data_generator (
    .clk(clk_xtoe), .rst(rst_xtoe), .enable(gen_enable), .rate(regs[REG_GEN_RATE][16:0]),
    .level(gen_level), .rd(gen_rd), .data(gen_data));

  assign src_level = src_gen ? gen_level : cdc_level;
  assign src_data  = src_gen ? gen_data  : cdc_data;
  assign gen_rd    = src_gen && src_rd;
  assign cdc_rd    = !src_gen && src_rd;

  toe_tx_framer #(.FRAME_WORDS(FRAME_WORDS), .LEVEL_W(LW)) u_toe_tx_framer (
    .clk(clk_xtoe), .rst(rst_xtoe), .src_level, .src_rd, .src_data, .toe_tx_afull,
    .toe_write, .toe_tx_sop, .toe_tx_eop, .toe_tx_data, .toe_tx_str, .toe_tx_valid_bytes,
    .frames_sent(tcp_frames_sent));

  // ---------------- TCP receive test logic ----------------
  logic tcp_rx;
  assign tcp_rx = toe_rx_valid && !toe_rx_udp;

  data_checker #(.FRAME_WORDS(FRAME_WORDS)) u_data_checker (
    .clk(clk_xtoe), .rst(rst_xtoe), .clear(chk_clear), .valid(tcp_rx),
    .sop(toe_rx_sop), .eop(toe_rx_eop), .data(toe_rx_data),
    .words(checker_words), .errors(checker_errors));

  throughput_meter #(.WINDOW_CYCLES(WINDOW_CYCLES)) u_throughput_meter (
    .clk(clk_xtoe), .rst(rst_xtoe), .valid(tcp_rx), .valid_bytes(toe_rx_valid_bytes),
    .bytes_per_window(rx_bytes_per_window), .window_tick(rx_window_tick));

  // ---------------- UDP path and registers ----------------
  logic [31:0] bus_addr;
  logic [7:0]  bus_wdata, bus_rdata;
  logic        bus_we, bus_re;

  udp_rbcp u_udp_rbcp (
    .clk(clk_xtoe), .rst(rst_xtoe),
    .rx_valid(toe_rx_valid), .rx_udp(toe_rx_udp), .rx_sop(toe_rx_sop), .rx_eop(toe_rx_eop),
    .rx_data(toe_rx_data), .rx_valid_bytes(toe_rx_valid_bytes),
    .uoe_tx_afull, .uoe_write, .uoe_tx_sop, .uoe_tx_eop, .uoe_tx_data, .uoe_tx_valid_bytes,
    .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata,
    .bad_pkts(udp_bad_pkts), .rx_overflows(udp_rx_overflows), .acks_sent(udp_acks), .replies_sent(udp_replies));

  always_comb begin
    for (int k = 0; k < NREGS; k++) ro_value[k] = '0;
    ro_value[REG_THROUGHPUT] = rx_bytes_per_window;
    ro_value[REG_STATUS]     = {checker_errors, up_drops[7:0], brd_drops[7:0]};
  end

  reg_control u_reg_control (
    .clk(clk_xtoe), .rst(rst_xtoe), .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata,
    .ro_value, .regs);

  assign bpix_gdac    = regs[REG_BPIX_GDAC];
  assign bpix_chain   = regs[REG_BPIX_CHAIN];
  assign bpix_array   = regs[REG_BPIX_ARRAY];
  assign trig_setting = regs[REG_TRIG];

  // ---------------- daisy chain ----------------
  daisy_chain #(.FIFO_DEPTH(ETH_DEPTH)) u_daisy_chain (
    .clk(clk_xtoe), .rst(rst_xtoe),
    .up_txd, .up_txc, .brd_txd, .brd_txc, .down_txd, .down_txc,
    .down_rxd, .down_rxc, .up_rxd_out, .up_rxc_out,
    .toe_rxd(toe_xgmii_rxd), .toe_rxc(toe_xgmii_rxc),
    .up_drops, .brd_drops, .grant_pulse(arb_grant_pulse), .grant_idx(arb_grant_idx));

endmodule
