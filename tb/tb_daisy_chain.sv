// tb_daisy_chain: self-checking test of the daisy-chain switch. The upstream
// board and this board's TOE send XGMII frames at the same time. Phase 1
// keeps the sum under the line rate: every frame must reach the downstream
// port whole, in order per source, with no drops. Phase 2 sends both at
// full rate, more than one link can carry: frames must then be dropped
// (never corrupted), the frames delivered must be an in-order subsequence of
// those sent, and the frames missing must equal the drop counters. The
// DOWN_RXD/RXC fan-out to the TOE and the upstream port is checked too.
module tb_daisy_chain;
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
  localparam int DEPTH = 64;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [63:0] up_txd, brd_txd, down_txd, down_rxd, up_rxd_out, toe_rxd;
  logic [7:0]  up_txc, brd_txc, down_txc, down_rxc, up_rxc_out, toe_rxc;
  logic [15:0] up_drops, brd_drops;
  logic        grant_pulse, grant_idx;
  int checks = 0, failures = 0;

  frame_t sent [2][$];     // frames sent by each source, in order
  int     nsent [2], nrecv [2], nskipped [2], grants [2];
  int     load_pct = 40;
  bit     sending = 0;

  daisy_chain #(.FIFO_DEPTH(DEPTH)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #5000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Two senders: a frame, then idles so that the source load is load_pct.
  for (genvar s = 0; s < 2; s++) begin : g_src
    initial begin
      xgmii_word_t w;
      w = XGMII_IDLE_WORD;
      if (s == 0) begin up_txd = w.d; up_txc = w.c; end
      else        begin brd_txd = w.d; brd_txc = w.c; end
      wait (!rst);
      forever begin
        frame_t f;
        int gap;
        if (!sending) begin @(negedge clk); continue; end
        f = make_frame($urandom_range(30, 200), 8'((s << 7) | (nsent[s] & 8'h7F)));
        sent[s].push_back(f);
        nsent[s]++;
        foreach (f[k]) begin
          @(negedge clk);
          w = xgmii_word_t'(f[k]);
          if (s == 0) begin up_txd = w.d; up_txc = w.c; end
          else        begin brd_txd = w.d; brd_txc = w.c; end
        end
        gap = 1 + (f.size() * (100 - load_pct)) / load_pct;
        repeat (gap) begin
          @(negedge clk);
          w = XGMII_IDLE_WORD;
          if (s == 0) begin up_txd = w.d; up_txc = w.c; end
          else        begin brd_txd = w.d; brd_txc = w.c; end
        end
      end
    end
  end

  // downstream receiver: rebuild frames and match them to what was sent
  frame_t cur;
  int     cur_src = -1;
  always @(negedge clk) if (!rst) begin
    xgmii_word_t w;
    w = '{c: down_txc, d: down_txd};
    if (cur_src < 0 && xgmii_is_start(w)) begin
      cur_src = int'(w.d[15]);
      cur = {};
    end
    if (cur_src >= 0) begin
      cur.push_back(w72_t'(w));
      if (xgmii_has_term(w)) begin
        bit found;
        found = 0;
        while (sent[cur_src].size() > 0 && !found) begin
          if (sent[cur_src][0] == cur) found = 1;
          else nskipped[cur_src]++;
          void'(sent[cur_src].pop_front());
        end
        chk(found, $sformatf("frame from source %0d matches one sent, in order", cur_src));
        nrecv[cur_src]++;
        cur_src = -1;
      end
    end
    if (grant_pulse) grants[grant_idx]++;
    // receive fan-out
    down_rxd = {$urandom, $urandom};
    down_rxc = 8'($urandom);
    #1;
    chk(up_rxd_out == down_rxd && up_rxc_out == down_rxc &&
        toe_rxd == down_rxd && toe_rxc == down_rxc, "DOWN_RX fan-out");
  end

  initial begin
    for (int s = 0; s < 2; s++) begin nsent[s] = 0; nrecv[s] = 0; nskipped[s] = 0; grants[s] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    sending = 1;
    repeat (20000) @(negedge clk);
    sending = 0;
    repeat (2000) @(negedge clk);
    chk(up_drops == 0 && brd_drops == 0, "no drops below line rate");
    chk(nrecv[0] == nsent[0] && nrecv[1] == nsent[1],
        $sformatf("phase 1 delivered %0d/%0d and %0d/%0d", nrecv[0], nsent[0], nrecv[1], nsent[1]));
    chk(grants[0] > 10 && grants[1] > 10, "both sources served");
    // phase 2: both at full rate
    load_pct = 97;
    sending = 1;
    repeat (20000) @(negedge clk);
    sending = 0;
    repeat (3000) @(negedge clk);
    chk(up_drops + brd_drops > 0, "overflow drops under overload");
    chk(nskipped[0] + sent[0].size() == int'(up_drops) && nskipped[1] + sent[1].size() == int'(brd_drops),
        $sformatf("missing frames %0d/%0d equal drops %0d/%0d",
                  nskipped[0] + sent[0].size(), nskipped[1] + sent[1].size(), up_drops, brd_drops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
