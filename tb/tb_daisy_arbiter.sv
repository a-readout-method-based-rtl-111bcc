// tb_daisy_arbiter: self-checking test of the daisy-chain arbiter with two
// modelled frame FIFOs. Phase 1 preloads both with frames, so the polling
// must alternate strictly between them; phase 2 feeds them at random times.
// The output bus is parsed back into frames: each must equal the next frame
// of the source its tag names, no frame may be interleaved with another,
// and at least 12 idle bytes must separate a terminate from the next start.
module tb_daisy_arbiter;
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
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [1:0]  frames_avail, rd_en;
  xgmii_word_t rdata [2];
  logic [63:0] down_txd;
  logic [7:0]  down_txc;
  logic        grant_pulse;
  logic        grant_idx;
  int checks = 0, failures = 0;

  w72_t src_q [2][$];       // words held by each modelled FIFO
  int   src_frames [2];     // whole frames held
  w72_t exp_q [2][$];       // words each source should deliver, in order
  int   out_frames [2];
  int   grants[$];

  daisy_arbiter #(.N(2)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int s, input int seq);
    frame_t f;
    f = make_frame($urandom_range(10, 80), 8'((s << 7) | (seq & 8'h7F)));
    foreach (f[k]) begin src_q[s].push_back(f[k]); exp_q[s].push_back(f[k]); end
    src_frames[s]++;
  endtask

  always_comb begin
    for (int s = 0; s < 2; s++) begin
      frames_avail[s] = (src_frames[s] != 0);
      rdata[s] = src_q[s].size() > 0 ? xgmii_word_t'(src_q[s][0]) : XGMII_IDLE_WORD;
    end
  end

  // A read seen at a falling edge is taken by the next rising edge.
  logic [1:0] rd_pending = 0;
  always @(negedge clk) if (!rst) begin
    for (int s = 0; s < 2; s++)
      if (rd_pending[s]) begin
        chk(src_q[s].size() > 0, "read from an empty source");
        if (xgmii_has_term(xgmii_word_t'(src_q[s][0]))) src_frames[s]--;
        void'(src_q[s].pop_front());
      end
    rd_pending = rd_en;
    if (grant_pulse) grants.push_back(int'(grant_idx));
  end

  // output parser
  int cur_src = -1, idle_bytes = 100;
  always @(negedge clk) if (!rst) begin
    xgmii_word_t w;
    w = '{c: down_txc, d: down_txd};
    if (cur_src < 0) begin
      if (xgmii_is_start(w)) begin
        cur_src = int'(w.d[15]);
        chk(idle_bytes >= 12, $sformatf("inter-frame gap %0d bytes", idle_bytes));
      end else begin
        chk(w == XGMII_IDLE_WORD, "only idles between frames");
        idle_bytes += 8;
      end
    end
    if (cur_src >= 0) begin
      chk(exp_q[cur_src].size() > 0 && w72_t'(w) == exp_q[cur_src][0],
          $sformatf("word of source %0d", cur_src));
      if (exp_q[cur_src].size() > 0) void'(exp_q[cur_src].pop_front());
      if (xgmii_has_term(w)) begin
        out_frames[cur_src]++;
        idle_bytes = 7 - int'(xgmii_term_lane(w));
        cur_src = -1;
      end
    end
  end

  initial begin
    src_frames[0] = 0; src_frames[1] = 0; out_frames[0] = 0; out_frames[1] = 0;
    repeat (3) @(negedge clk);
    for (int n = 0; n < 10; n++) begin load(0, n); load(1, n); end
    rst = 0;
    wait (src_frames[0] == 0 && src_frames[1] == 0);
    repeat (10) @(negedge clk);
    chk(grants.size() == 20, $sformatf("grants %0d", grants.size()));
    for (int g = 1; g < grants.size(); g++)
      chk(grants[g] != grants[g-1], "polling alternates while both wait");
    for (int n = 10; n < 60; n++) begin
      int s;
      s = $urandom_range(0, 1);
      load(s, n);
      repeat ($urandom_range(0, 12)) @(negedge clk);
    end
    wait (src_frames[0] == 0 && src_frames[1] == 0);
    repeat (20) @(negedge clk);
    chk(exp_q[0].size() == 0 && exp_q[1].size() == 0, "all words delivered");
    chk(out_frames[0] + out_frames[1] == 70, $sformatf("frames out %0d", out_frames[0] + out_frames[1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
