// tb_linearity: the linearity test of the TCP path. The whole board
// (readout_top at its default sizes) sends generator frames to a modelled
// offload core that loops them back to its own receive side, as a receiving
// board would see them. The host sets the generator over UDP to 1, 2, ... 10
// Gbit/s, waits for the rate to settle, and reads the throughput register
// (payload bytes per 100 us window) back over UDP at each step.
//
// Expected count per window: min(r/65536, 128/129) x 15625 clocks x 8 bytes,
// where r is the rate register and 128/129 is the framer's ceiling (one idle
// clock per 128-word frame). A step passes if the measured count is within
// one frame (1024 bytes) of that. The checker must also see no payload error.
// The testbench models only this logic: the saturation of the real offload
// core and host near 4.5 to 6 Gbit/s is outside it.
module tb_linearity;
  import readout_pkg::*;
  // ---- RBCP packet helpers: header word, then data bytes from DATA[63:56] down ----
  typedef ustream_t pkt_t[$];
  function automatic pkt_t make_pkt(input logic [7:0] ver, input logic [7:0] cmdf,
                                    input logic [7:0] id, input logic [7:0] len,
                                    input logic [31:0] addr, input logic [7:0] bytes[$]);
    pkt_t p;
    ustream_t w;
    w = '{sop: 1'b1, eop: (bytes.size() == 0), valid_bytes: 8'hFF, data: {ver, cmdf, id, len, addr}};
    p.push_back(w);
    for (int i = 0; i < bytes.size(); i += 8) begin
      w = '{sop: 1'b0, eop: 1'b0, valid_bytes: 8'h00, data: 64'h0};
      for (int k = 0; k < 8 && i + k < bytes.size(); k++) begin
        w.data[63 - 8*k -: 8] = bytes[i + k];
        w.valid_bytes[7 - k]  = 1'b1;
      end
      w.eop = (i + 8 >= bytes.size());
      p.push_back(w);
    end
    return p;
  endfunction
  // ---- XGMII frame helpers (start, data bytes, terminate, idles) ----
  typedef logic [71:0] w72_t;
  typedef w72_t frame_t[$];

  function automatic frame_t make_frame(input int nbytes, input logic [7:0] tag);
    frame_t f;
    logic [7:0] bytes[$];
    int i;
    bytes.push_back(tag);
    for (int b = 1; b < nbytes; b++) bytes.push_back(8'($urandom));
    // lane stream: start, data bytes, terminate, idles
    begin
      logic [7:0] lane_d[$];
      logic       lane_c[$];
      lane_d.push_back(XGMII_START); lane_c.push_back(1'b1);
      foreach (bytes[k]) begin lane_d.push_back(bytes[k]); lane_c.push_back(1'b0); end
      lane_d.push_back(XGMII_TERM); lane_c.push_back(1'b1);
      while (lane_d.size() % 8 != 0) begin lane_d.push_back(XGMII_IDLE); lane_c.push_back(1'b1); end
      i = 0;
      while (i < lane_d.size()) begin
        xgmii_word_t w;
        for (int l = 0; l < 8; l++) begin
          w.d[8*l +: 8] = lane_d[i + l];
          w.c[l]        = lane_c[i + l];
        end
        f.push_back(w72_t'(w));
        i += 8;
      end
    end
    return f;
  endfunction

  function automatic w72_t idle_word();
    return w72_t'(XGMII_IDLE_WORD);
  endfunction
  localparam int FW = 128;
  localparam int WIN = 15625;
  logic clk_user = 0, clk_xtoe = 0, rst_user = 1, rst_xtoe = 1;
  always #625 clk_user = ~clk_user;   // 80 MHz: the two periods are in the ratio 156.25 : 80
  always #320 clk_xtoe = ~clk_xtoe;   // 156.25 MHz (time unit is irrelevant, cycles are counted)
  wire clk = clk_xtoe;

  logic        ddr_rd_valid = 0, ddr_rd_ready;
  logic [63:0] ddr_rd_data = 0;
  logic        toe_tx_afull = 0, toe_write, toe_tx_sop, toe_tx_eop, toe_tx_str;
  logic [63:0] toe_tx_data;
  logic [7:0]  toe_tx_valid_bytes;
  logic        rx_valid = 0, rx_udp = 0, rx_sop = 0, rx_eop = 0;
  logic [63:0] rx_data = 0;
  logic [7:0]  rx_valid_bytes = 0;
  logic        uoe_tx_afull = 0, uoe_write, uoe_tx_sop, uoe_tx_eop;
  logic [63:0] uoe_tx_data;
  logic [7:0]  uoe_tx_valid_bytes;
  logic [63:0] brd_txd, up_txd, down_txd, down_rxd = 0, up_rxd_out, toe_xgmii_rxd;
  logic [7:0]  brd_txc, up_txc, down_txc, down_rxc = 8'hFF, up_rxc_out, toe_xgmii_rxc;
  logic [31:0] bpix_gdac, bpix_chain, bpix_array, trig_setting;
  logic [31:0] tcp_frames_sent, rx_bytes_per_window, checker_words;
  logic        rx_window_tick, arb_grant_pulse, arb_grant_idx;
  logic [15:0] checker_errors, udp_bad_pkts, udp_rx_overflows, udp_acks, udp_replies, up_drops, brd_drops;

  readout_top dut (
    .clk_user, .rst_user, .clk_xtoe, .rst_xtoe,
    .ddr_rd_valid, .ddr_rd_data, .ddr_rd_ready,
    .toe_tx_afull, .toe_write, .toe_tx_sop, .toe_tx_eop, .toe_tx_data, .toe_tx_str, .toe_tx_valid_bytes,
    .toe_rx_valid(rx_valid), .toe_rx_udp(rx_udp), .toe_rx_sop(rx_sop), .toe_rx_eop(rx_eop),
    .toe_rx_data(rx_data), .toe_rx_valid_bytes(rx_valid_bytes),
    .uoe_tx_afull, .uoe_write, .uoe_tx_sop, .uoe_tx_eop, .uoe_tx_data, .uoe_tx_valid_bytes,
    .brd_txd, .brd_txc, .up_txd, .up_txc, .down_txd, .down_txc, .down_rxd, .down_rxc,
    .up_rxd_out, .up_rxc_out, .toe_xgmii_rxd, .toe_xgmii_rxc,
    .bpix_gdac, .bpix_chain, .bpix_array, .trig_setting,
    .tcp_frames_sent, .rx_bytes_per_window, .rx_window_tick, .checker_errors, .checker_words,
    .udp_bad_pkts, .udp_rx_overflows, .udp_acks, .udp_replies, .up_drops, .brd_drops,
    .arb_grant_pulse, .arb_grant_idx);

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // mechanism counters
  int m_udp_write = 0, m_udp_read = 0, m_udp_bad = 0, m_ddr_frames = 0, m_gen_frames = 0;
  int m_mode_switch = 0, m_afull_stall = 0, m_cdc_full = 0, m_chk_error = 0, m_window = 0;
  int m_grant_up = 0, m_grant_brd = 0, m_eth_drop = 0, m_fanout = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- XTOE receive bus: one driver, packets queued ----------------
  typedef struct { bit udp; pkt_t words; } rxpkt_t;
  rxpkt_t rx_queue[$];
  always begin
    @(negedge clk);
    if (rx_queue.size() > 0 && !rst_xtoe) begin
      rxpkt_t p;
      p = rx_queue.pop_front();
      foreach (p.words[k]) begin
        rx_valid = 1; rx_udp = p.udp; rx_sop = p.words[k].sop; rx_eop = p.words[k].eop;
        rx_data = p.words[k].data; rx_valid_bytes = p.words[k].valid_bytes;
        @(negedge clk);
      end
      rx_valid = 0; rx_sop = 0; rx_eop = 0; rx_udp = 0;
    end
  end

  // ---------------- XTOE transmit: collect TCP frames, loop them back ----------------
  pkt_t  tcp_cur;
  pkt_t  tcp_frames[$];     // frames seen, for checking
  bit    loopback = 1;
  logic  prev_write = 0;
  always @(negedge clk) if (!rst_xtoe) begin
    if (toe_write) begin
      ustream_t w;
      w = '{sop: toe_tx_sop, eop: toe_tx_eop, valid_bytes: toe_tx_valid_bytes, data: toe_tx_data};
      chk(w.sop == (tcp_cur.size() == 0), "TCP SOP on the first word only");
      if (tcp_cur.size() > 0) chk(prev_write, "gap inside a TCP frame");
      tcp_cur.push_back(w);
      if (w.eop) begin
        rxpkt_t p;
        chk(tcp_cur.size() == FW, $sformatf("TCP frame of %0d words", tcp_cur.size()));
        tcp_frames.push_back(tcp_cur);
        p.udp = 0; p.words = tcp_cur;
        if (loopback) rx_queue.push_back(p);
        tcp_cur = {};
      end
    end
    prev_write = toe_write;
    if (toe_tx_afull && dut.u_toe_tx_framer.src_level >= 10'(FW) && !dut.u_toe_tx_framer.src_rd)
      m_afull_stall++;
    if (rx_window_tick) m_window++;
    if (arb_grant_pulse) begin if (arb_grant_idx) m_grant_brd++; else m_grant_up++; end
  end

  // ---------------- UOE transmit: replies ----------------
  pkt_t replies[$];
  pkt_t rep_cur;
  always @(negedge clk) if (!rst_xtoe && uoe_write) begin
    rep_cur.push_back('{sop: uoe_tx_sop, eop: uoe_tx_eop, valid_bytes: uoe_tx_valid_bytes, data: uoe_tx_data});
    if (uoe_tx_eop) begin replies.push_back(rep_cur); rep_cur = {}; end
  end

  // ---------------- host: RBCP over UDP ----------------
  logic [7:0] next_id = 8'h01;
  task automatic wait_reply(output pkt_t r, input string what);
    int t;
    t = 0;
    while (replies.size() == 0 && t < 5000) begin @(negedge clk); t++; end
    chk(replies.size() > 0, {what, ": reply received"});
    if (replies.size() > 0) r = replies.pop_front(); else r = {};
  endtask

  task automatic reg_write(input int k, input logic [31:0] v);
    logic [7:0] b[$];
    logic [7:0] none[$];
    rxpkt_t p;
    pkt_t r;
    b = {v[31:24], v[23:16], v[15:8], v[7:0]};
    p.udp = 1; p.words = make_pkt(RBCP_VER_TYPE, RBCP_CMD_WR, next_id, 8'd4, 32'(4 * k), b);
    rx_queue.push_back(p);
    wait_reply(r, "register write");
    chk(r == make_pkt(RBCP_VER_TYPE, 8'h88, next_id, 8'd4, 32'(4 * k), none), "write acknowledge");
    next_id++;
    m_udp_write++;
  endtask

  task automatic reg_read(input int k, output logic [31:0] v);
    logic [7:0] none[$];
    rxpkt_t p;
    pkt_t r;
    p.udp = 1; p.words = make_pkt(RBCP_VER_TYPE, RBCP_CMD_RD, next_id, 8'd4, 32'(4 * k), none);
    rx_queue.push_back(p);
    wait_reply(r, "register read");
    v = 0;
    if (r.size() == 2) begin
      chk(r[0].data == {8'hFF, 8'hC8, next_id, 8'd4, 32'(4 * k)}, "read reply header");
      chk(r[1].eop && r[1].valid_bytes == 8'hF0, "read reply data word");
      v = r[1].data[63:32];
    end else chk(0, "read reply length");
    next_id++;
    m_udp_read++;
  endtask

  initial begin
    logic [31:0] v;
    int exp_b, rate, n_steps;
    n_steps = 0;
    ddr_rd_valid = 0; ddr_rd_data = 0;
    up_txd = XGMII_IDLE_WORD.d; up_txc = XGMII_IDLE_WORD.c;
    brd_txd = XGMII_IDLE_WORD.d; brd_txc = XGMII_IDLE_WORD.c;
    repeat (5) @(negedge clk_user);
    rst_user = 0; rst_xtoe = 0;
    repeat (10) @(negedge clk);
    reg_write(REG_CTRL, 32'h0000_0006);           // generator source, disabled, checker cleared
    reg_write(REG_CTRL, 32'h0000_0003);           // enable
    for (int g = 1; g <= 10; g++) begin
      rate = (g * 65536 + 5) / 10;
      reg_write(REG_GEN_RATE, 32'(rate));
      @(posedge rx_window_tick);                  // window with the rate change
      @(posedge rx_window_tick);                  // first full window at the new rate
      repeat (20) @(negedge clk);
      reg_read(REG_THROUGHPUT, v);
      exp_b = (rate >= 65536 * 128 / 129) ? (15625 * 8 * 128) / 129 : int'((longint'(rate) * 15625 * 8) / 65536);
      $display("rate %2d Gbit/s set: %0d bytes per 100 us = %0d.%02d Gbit/s (expected %0d)", g, v,
               v * 8 / 100000, (v * 8 / 1000) % 100, exp_b);
      chk(int'(v) >= exp_b - 1024 && int'(v) <= exp_b + 1024, $sformatf("throughput at %0d Gbit/s", g));
      n_steps++;
    end
    chk(checker_errors == 0 && checker_words > 0, "no payload errors over the sweep");
    chk(udp_rx_overflows == 0, "no UDP words lost while the TCP stream shares the receive bus");
    chk(n_steps == 10, "all ten rates measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
