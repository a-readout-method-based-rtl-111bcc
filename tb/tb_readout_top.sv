// tb_readout_top: end-to-end test of one read-out board's user logic at its
// default sizes (128-word TCP frames, 512-word FIFOs, 100 us throughput
// window). The testbench stands in for the vendor cores around it: a DDR3
// cache FIFO on the 80 MHz side, the XTOE core (TCP frames it is given are
// looped back onto its receive bus, as the second board of the paper's
// bandwidth test would return them; UDP packets from a host model share the
// same bus, told apart by the UDP flag), the TOE MAC and upstream PCS
// feeding XGMII frames, and the downstream PCS.
//
// Sequence: configure over UDP and read the registers back; stream DDR3
// data as TCP frames (with an XTOE almost-full stall); switch the source to
// the internal generator at 6 Gbps and check payload, rate and the
// throughput register; fill the clock-crossing FIFO until the DDR3 side is
// held off; run the daisy chain below and above the line rate. Every
// mechanism is counted and a failure is counted for one that never happened.
module tb_readout_top;
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

  // ---------------- DDR3 cache model (80 MHz) ----------------
  int   ddr_words_left = 0;
  logic [31:0] ddr_ctr = 0;
  always @(negedge clk_user) if (!rst_user) begin
    if (ddr_rd_valid && ddr_rd_ready) begin ddr_ctr++; ddr_words_left--; end
    ddr_rd_valid = (ddr_words_left > 0);
    ddr_rd_data  = {32'hDD00_0000, ddr_ctr};
    if (ddr_rd_valid && !ddr_rd_ready) m_cdc_full++;
  end

  // ---------------- XGMII sources for the daisy chain ----------------
  int xg_pct [2];
  int xg_sent [2], xg_recv [2], xg_missing [2];
  frame_t xg_q [2][$];
  bit xg_on = 0;
  for (genvar s = 0; s < 2; s++) begin : g_xg
    initial begin
      xgmii_word_t w;
      w = XGMII_IDLE_WORD;
      if (s == 0) begin up_txd = w.d; up_txc = w.c; end else begin brd_txd = w.d; brd_txc = w.c; end
      forever begin
        frame_t f;
        @(negedge clk);
        if (!xg_on) continue;
        f = make_frame($urandom_range(60, 1500), 8'((s << 7) | (xg_sent[s] & 8'h7F)));
        xg_q[s].push_back(f); xg_sent[s]++;
        foreach (f[k]) begin
          w = xgmii_word_t'(f[k]);
          if (s == 0) begin up_txd = w.d; up_txc = w.c; end else begin brd_txd = w.d; brd_txc = w.c; end
          @(negedge clk);
        end
        w = XGMII_IDLE_WORD;
        if (s == 0) begin up_txd = w.d; up_txc = w.c; end else begin brd_txd = w.d; brd_txc = w.c; end
        repeat (1 + (f.size() * (100 - xg_pct[s])) / xg_pct[s]) @(negedge clk);
      end
    end
  end
  frame_t dn_cur;
  int dn_src = -1;
  always @(negedge clk) if (!rst_xtoe) begin
    xgmii_word_t w;
    w = '{c: down_txc, d: down_txd};
    if (dn_src < 0 && xgmii_is_start(w)) begin dn_src = int'(w.d[15]); dn_cur = {}; end
    if (dn_src >= 0) begin
      dn_cur.push_back(w72_t'(w));
      if (xgmii_has_term(w)) begin
        bit found;
        found = 0;
        while (xg_q[dn_src].size() > 0 && !found) begin
          if (xg_q[dn_src][0] == dn_cur) found = 1; else xg_missing[dn_src]++;
          void'(xg_q[dn_src].pop_front());
        end
        chk(found, "downstream frame matches one sent, in order");
        xg_recv[dn_src]++;
        dn_src = -1;
      end
    end
    down_rxd = {$urandom, $urandom}; down_rxc = 8'($urandom);
    #1;
    chk(up_rxd_out == down_rxd && toe_xgmii_rxd == down_rxd &&
        up_rxc_out == down_rxc && toe_xgmii_rxc == down_rxc, "DOWN_RX fan-out");
    m_fanout++;
  end

  // ---------------- sequence ----------------
  initial begin
    logic [31:0] v;
    int f0, t0, t1, bytes_lo, bytes_hi;
    for (int s = 0; s < 2; s++) begin xg_pct[s] = 30; xg_sent[s] = 0; xg_recv[s] = 0; xg_missing[s] = 0; end
    repeat (5) @(negedge clk_user);
    rst_user = 0; rst_xtoe = 0;
    repeat (10) @(negedge clk);

    // 1. configuration over UDP with read back
    reg_write(REG_BPIX_GDAC,  32'h0123_4567);
    reg_write(REG_BPIX_CHAIN, 32'h89AB_CDEF);
    reg_write(REG_BPIX_ARRAY, 32'h5555_AAAA);
    reg_write(REG_TRIG,       32'h0000_03E8);
    chk(bpix_gdac == 32'h0123_4567 && bpix_chain == 32'h89AB_CDEF &&
        bpix_array == 32'h5555_AAAA && trig_setting == 32'h0000_03E8, "configuration outputs");
    reg_read(REG_BPIX_CHAIN, v);  chk(v == 32'h89AB_CDEF, "read back chain register");
    reg_read(REG_TRIG, v);        chk(v == 32'h0000_03E8, "read back trigger register");
    begin
      rxpkt_t p;
      logic [7:0] b[$];
      b = {8'h1, 8'h2};
      p.udp = 1; p.words = make_pkt(8'h00, RBCP_CMD_WR, 8'h99, 8'd2, 32'd0, b);
      rx_queue.push_back(p);
      repeat (200) @(negedge clk);
      chk(replies.size() == 0 && udp_bad_pkts == 1, "malformed UDP packet ignored and counted");
      m_udp_bad += int'(udp_bad_pkts);
    end

    // 2. DDR3 source: 4 frames, with an almost-full stall in the middle
    ddr_words_left = 4 * FW;
    toe_tx_afull = 1;
    repeat (600) @(negedge clk);
    chk(tcp_frames.size() == 0, "no frame while the XTOE is almost full");
    toe_tx_afull = 0;
    repeat (1500) @(negedge clk);
    chk(tcp_frames.size() == 4, $sformatf("DDR3 frames sent %0d", tcp_frames.size()));
    for (int f = 0; f < tcp_frames.size(); f++)
      for (int k = 0; k < FW; k++)
        chk(tcp_frames[f][k].data == {32'hDD00_0000, 32'(f * FW + k)} && tcp_frames[f][k].valid_bytes == 8'hFF,
            "DDR3 payload order");
    m_ddr_frames = tcp_frames.size();
    repeat (200) @(negedge clk);
    chk(checker_errors != 0, "checker flags payload that is not the generator's");
    if (checker_errors != 0) m_chk_error++;

    // 3. switch to the generator at 6 Gbps (39322/65536 words per clock)
    reg_write(REG_GEN_RATE, 32'd39322);
    reg_write(REG_CTRL, 32'h0000_0007);       // enable, generator, clear checker
    reg_write(REG_CTRL, 32'h0000_0003);
    reg_read(REG_CTRL, v); chk(v == 32'h3, "control register read back");
    m_mode_switch++;
    @(posedge rx_window_tick);
    f0 = tcp_frames.size(); t0 = int'(tcp_frames_sent);
    @(posedge rx_window_tick);
    t1 = int'(tcp_frames_sent);
    // 0.6 words/clock x 15625 clocks = 9375 words = 73.2 frames per window
    chk(t1 - t0 >= 72 && t1 - t0 <= 75, $sformatf("generator frames per window %0d", t1 - t0));
    bytes_lo = 72 * FW * 8; bytes_hi = 75 * FW * 8;
    chk(int'(rx_bytes_per_window) >= bytes_lo && int'(rx_bytes_per_window) <= bytes_hi,
        $sformatf("throughput %0d bytes per 100 us (%0d.%03d Gbps)", rx_bytes_per_window,
                  rx_bytes_per_window * 8 / 100000, (rx_bytes_per_window * 8 / 100) % 1000));
    $display("generator at 39322/65536: %0d frames, %0d bytes per 100 us window", t1 - t0, rx_bytes_per_window);
    for (int f = f0; f < tcp_frames.size(); f++)
      for (int k = 0; k < FW; k++)
        chk(tcp_frames[f][k].data == gen_payload(32'(k)), "generator payload repeats");
    m_gen_frames = tcp_frames.size() - f0;
    reg_read(REG_THROUGHPUT, v);
    chk(v == rx_bytes_per_window, "throughput register read over UDP");
    chk(checker_errors == 0 && checker_words > 0, "checker finds no error in generator frames");

    // 4. DDR3 data waiting while the generator is selected: the CDC FIFO fills
    ddr_words_left = 600;
    repeat (2500) @(negedge clk);
    chk(!ddr_rd_ready, "DDR3 side held off when the CDC FIFO is full");
    reg_write(REG_CTRL, 32'h0000_0000);       // back to DDR3: it drains
    repeat (3000) @(negedge clk);
    chk(ddr_words_left == 0, "CDC FIFO drained after switching back");
    m_mode_switch++;

    // 5. daisy chain below and above the line rate
    xg_on = 1;
    repeat (30000) @(negedge clk);
    xg_on = 0;
    repeat (3000) @(negedge clk);
    chk(up_drops == 0 && brd_drops == 0, "no daisy drops below the line rate");
    chk(xg_recv[0] == xg_sent[0] && xg_recv[1] == xg_sent[1], "all daisy frames delivered");
    xg_pct[0] = 95; xg_pct[1] = 95;
    xg_on = 1;
    repeat (30000) @(negedge clk);
    xg_on = 0;
    repeat (5000) @(negedge clk);
    m_eth_drop = int'(up_drops) + int'(brd_drops);
    chk(xg_missing[0] + xg_q[0].size() == int'(up_drops) && xg_missing[1] + xg_q[1].size() == int'(brd_drops),
        "daisy frames missing equal the drop counters");
    reg_read(REG_STATUS, v);
    chk(v[15:8] == up_drops[7:0] && v[7:0] == brd_drops[7:0], "status register shows drops");

    // mechanisms
    chk(m_udp_write > 0,   "mechanism: UDP register write");
    chk(m_udp_read > 0,    "mechanism: UDP read back");
    chk(m_udp_bad > 0,     "mechanism: malformed UDP packet");
    chk(m_ddr_frames > 0,  "mechanism: DDR3 frames to the XTOE");
    chk(m_gen_frames > 0,  "mechanism: generator frames");
    chk(m_mode_switch > 0, "mechanism: source switch");
    chk(m_afull_stall > 0, "mechanism: XTOE almost-full stall");
    chk(m_cdc_full > 0,    "mechanism: CDC FIFO back-pressure");
    chk(m_chk_error > 0,   "mechanism: checker error detection");
    chk(m_window > 0,      "mechanism: throughput window");
    chk(m_grant_up > 0 && m_grant_brd > 0, "mechanism: daisy polling of both FIFOs");
    chk(m_eth_drop > 0,    "mechanism: daisy FIFO overflow drop");
    chk(m_fanout > 0,      "mechanism: DOWN_RX fan-out");
    $display("mechanisms: udp_write=%0d udp_read=%0d udp_bad=%0d ddr_frames=%0d gen_frames=%0d mode_switch=%0d afull_stall=%0d cdc_full=%0d chk_error=%0d windows=%0d grant_up=%0d grant_brd=%0d eth_drop=%0d",
             m_udp_write, m_udp_read, m_udp_bad, m_ddr_frames, m_gen_frames, m_mode_switch, m_afull_stall,
             m_cdc_full, m_chk_error, m_window, m_grant_up, m_grant_brd, m_eth_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
