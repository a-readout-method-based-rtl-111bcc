// tb_eth_fifo: self-checking test of the store-and-forward XGMII frame
// FIFO. Writes frames of random length with idle words between them; a
// reader pops only committed frames (frames > 0) at a random pace. Checks
// that every frame comes out whole and in order, that idle words are not
// stored, that a frame longer than the FIFO is dropped (dropped pulse, drops
// count) while the frames around it survive, and that a frame cut short by
// a new start is discarded.
module tb_eth_fifo;
  import readout_pkg::*;
  localparam int DEPTH = 32;
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
  xgmii_word_t wword, rdata;
  logic        rd_en = 0, dropped;
  logic [5:0]  frames;
  logic [15:0] drops;
  int checks = 0, failures = 0;
  w72_t exp_q[$];
  int nframes_in = 0, nframes_out = 0, ndrop_pulses = 0;
  bit reading = 1;

  eth_fifo #(.DEPTH(DEPTH)) dut (.*);

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

  initial wword = xgmii_word_t'(idle_word());

  task automatic send(input frame_t f, input bit expect_kept);
    foreach (f[k]) begin
      @(negedge clk); wword = xgmii_word_t'(f[k]);
      if (expect_kept) exp_q.push_back(f[k]);
    end
    if (expect_kept) nframes_in++;
    repeat ($urandom_range(1, 3)) begin @(negedge clk); wword = xgmii_word_t'(idle_word()); end
  endtask

  // reader: pops committed words at a random pace
  always @(negedge clk) if (!rst) begin
    rd_en = reading && (frames != 0) && ($urandom_range(0, 7) != 0);
    if (rd_en) begin
      chk(exp_q.size() > 0 && w72_t'(rdata) == exp_q[0], $sformatf("frame word out of order t=%0t got %h exp %h", $time, rdata, exp_q.size() ? exp_q[0] : 0));
      chk(!(rdata == XGMII_IDLE_WORD), "idle word stored");
      if (xgmii_has_term(rdata)) nframes_out++;
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (dropped) ndrop_pulses++;
  end

  initial begin
    frame_t f, g;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 40; n++) send(make_frame($urandom_range(20, 100), 8'(n)), 1);
    chk(drops == 0, "no drops while the reader keeps up");
    // a frame longer than the FIFO, with the reader stopped
    repeat (40) @(negedge clk);
    reading = 0;
    send(make_frame(8 * (DEPTH + 8), 8'hEE), 0);
    repeat (5) @(negedge clk);
    chk(drops == 16'd1 && ndrop_pulses == 1, $sformatf("overflow drop counted (%0d)", drops));
    chk(frames == 0, "dropped frame not visible");
    reading = 1;
    send(make_frame(60, 8'h55), 1);
    // a frame cut short by a new start
    f = make_frame(60, 8'h66);
    g = make_frame(40, 8'h77);
    for (int k = 0; k < 4; k++) begin @(negedge clk); wword = xgmii_word_t'(f[k]); end
    send(g, 1);
    repeat (200) @(negedge clk);
    chk(drops == 16'd2, $sformatf("truncated frame dropped (%0d)", drops));
    chk(exp_q.size() == 0, $sformatf("%0d words not delivered", exp_q.size()));
    chk(nframes_out == nframes_in, $sformatf("frames out %0d in %0d", nframes_out, nframes_in));
    chk(frames == 0, "FIFO empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
