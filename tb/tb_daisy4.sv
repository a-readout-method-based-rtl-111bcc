// tb_daisy4: the daisy-mode measurement. Four read-out boards in series, each
// a daisy_chain at its default size (512-word frame FIFOs): board k's
// upstream input is board k-1's downstream output, and the last board's
// downstream output goes to the server. Each board's own MAC sends frames at
// a different load (10, 15, 10 and 15 % of the 10G line, 5 Gbit/s together,
// the shared bandwidth of the four-board chain). Frame lengths are random,
// 64 to 1500 bytes.
//
// Checks: every frame of every board reaches the server, in order per board,
// unchanged; no FIFO drops a frame; the measured total at the server is the
// sum of the offered loads (within 0.5 Gbit/s); each board's arbiter grants
// both its inputs. The server-to-board direction is checked to reach every
// board's TOE unchanged through the fan-out chain.
module tb_daisy4;
  import readout_pkg::*;
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
  localparam int NB = 4;
  localparam int RUN = 60000;            // clocks of traffic
  logic clk = 0, rst = 1;
  always #320 clk = ~clk;                // 156.25 MHz clock; only cycles are counted

  logic [63:0] brd_d [NB], up_d [NB], dn_d [NB], rxd [NB+1], toe_d [NB];
  logic [7:0]  brd_c [NB], up_c [NB], dn_c [NB], rxc [NB+1], toe_c [NB];
  logic [15:0] up_drops [NB], brd_drops [NB];
  logic        gp [NB], gi [NB];

  for (genvar b = 0; b < NB; b++) begin : g_b
    if (b == 0) begin : g_first
      assign up_d[b] = XGMII_IDLE_WORD.d; assign up_c[b] = XGMII_IDLE_WORD.c;
    end else begin : g_next
      assign up_d[b] = dn_d[b-1]; assign up_c[b] = dn_c[b-1];
    end
    daisy_chain u_board (
      .clk, .rst, .up_txd(up_d[b]), .up_txc(up_c[b]), .brd_txd(brd_d[b]), .brd_txc(brd_c[b]),
      .down_txd(dn_d[b]), .down_txc(dn_c[b]), .down_rxd(rxd[b+1]), .down_rxc(rxc[b+1]),
      .up_rxd_out(rxd[b]), .up_rxc_out(rxc[b]), .toe_rxd(toe_d[b]), .toe_rxc(toe_c[b]),
      .up_drops(up_drops[b]), .brd_drops(brd_drops[b]), .grant_pulse(gp[b]), .grant_idx(gi[b]));
  end

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (RUN + 20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pct [NB] = '{10, 15, 10, 15};
  bit on = 0;
  frame_t sent_q [NB][$];
  int sent [NB], recv [NB], grants [NB][2];
  longint bytes_sent [NB];
  for (genvar b = 0; b < NB; b++) begin : g_src
    initial begin
      int seq;
      seq = 0; sent[b] = 0; bytes_sent[b] = 0;
      brd_d[b] = XGMII_IDLE_WORD.d; brd_c[b] = XGMII_IDLE_WORD.c;
      forever begin
        frame_t f;
        int nb;
        @(negedge clk);
        if (!on) continue;
        nb = $urandom_range(64, 1500);
        f = make_frame(nb, 8'((b << 6) | (seq & 63)));
        seq++;
        sent_q[b].push_back(f); sent[b]++; bytes_sent[b] += nb;
        foreach (f[k]) begin
          {brd_c[b], brd_d[b]} = f[k];
          @(negedge clk);
        end
        brd_d[b] = XGMII_IDLE_WORD.d; brd_c[b] = XGMII_IDLE_WORD.c;
        // idle time so that frame words / all words = pct
        repeat ((f.size() * (100 - pct[b])) / pct[b]) @(negedge clk);
      end
    end
  end

  // server side: frames leaving the last board
  frame_t cur;
  bit infr = 0;
  longint srv_words = 0, srv_first = -1, srv_last = 0, cyc = 0;
  always @(negedge clk) if (!rst) begin
    xgmii_word_t w;
    cyc++;
    w = '{c: dn_c[NB-1], d: dn_d[NB-1]};
    if (!infr && xgmii_is_start(w)) begin infr = 1; cur = {}; end
    if (infr) begin
      cur.push_back(w72_t'(w));
      if (xgmii_has_term(w)) begin
        int src;
        src = int'(cur[0][15:14]);
        chk(sent_q[src].size() > 0 && sent_q[src][0] == cur, $sformatf("frame from board %0d intact and in order", src));
        if (sent_q[src].size() > 0) void'(sent_q[src].pop_front());
        recv[src]++;
        infr = 0;
      end
    end
    for (int b = 0; b < NB; b++) if (gp[b]) grants[b][gi[b]]++;
    // server to boards: random words must reach every board's TOE
    rxd[NB] = {$urandom, $urandom}; rxc[NB] = 8'($urandom);
    #1;
    for (int b = 0; b < NB; b++) chk(toe_d[b] == rxd[NB] && toe_c[b] == rxc[NB], "server data reaches every board");
  end

  initial begin
    longint total;
    real gbps, offered;
    for (int b = 0; b < NB; b++) begin recv[b] = 0; grants[b][0] = 0; grants[b][1] = 0; end
    rxd[NB] = 0; rxc[NB] = 8'hFF;
    repeat (5) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    on = 1;
    repeat (RUN) @(negedge clk);
    on = 0;
    repeat (8000) @(negedge clk);
    total = 0; offered = 0;
    for (int b = 0; b < NB; b++) begin
      chk(sent_q[b].size() == 0 && recv[b] == sent[b], $sformatf("board %0d: %0d of %0d frames delivered", b, recv[b], sent[b]));
      chk(up_drops[b] == 0 && brd_drops[b] == 0, $sformatf("board %0d: no drops", b));
      if (b > 0) chk(grants[b][0] > 0 && grants[b][1] > 0, $sformatf("board %0d polls both FIFOs", b));
      total += bytes_sent[b];
      offered += real'(pct[b]) / 10.0;
    end
    // payload bytes over the traffic time: 1 clock = 6.4 ns
    gbps = real'(total) * 8.0 / (real'(RUN) * 6.4);
    $display("four boards: offered %0.2f Gbit/s of frames, %0d payload bytes in %0d clocks = %0.2f Gbit/s payload at the server",
             offered, total, RUN, gbps);
    chk(gbps > offered - 0.6 && gbps < offered + 0.3, "server throughput equals the sum of the boards");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
