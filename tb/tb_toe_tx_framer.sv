// tb_toe_tx_framer: self-checking test of the XTOE TCP frame sender. A
// reference source queue feeds it at a random rate while the XTOE almost-full
// input toggles. Checks, at every clock: TOE_WRITE is high for exactly
// FRAME_WORDS consecutive clocks per frame with SOP on the first and EOP on
// the last (no gap, as the XTOE timing requires), the words come out in
// source order with all bytes valid, a frame starts only when the source
// holds a whole frame and the core is not almost full, and the first word
// appears two clocks after the source reaches a whole frame.
module tb_toe_tx_framer;
  localparam int FW = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [9:0]  src_level;
  logic        src_rd, toe_tx_afull = 0;
  logic [63:0] src_data;
  logic        toe_write, toe_tx_sop, toe_tx_eop, toe_tx_str;
  logic [63:0] toe_tx_data;
  logic [7:0]  toe_tx_valid_bytes;
  logic [31:0] frames_sent;
  int checks = 0, failures = 0;
  logic [63:0] src_q[$], exp_q[$];
  logic [63:0] ctr = 0;
  int burst = 0, frames = 0, stalls = 0;
  bit feed = 1, gapfree = 1;

  toe_tx_framer #(.FRAME_WORDS(FW)) dut (.*);

  assign src_level = 10'(src_q.size());
  assign src_data  = src_q.size() > 0 ? src_q[0] : 64'h0;

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source model: pop on src_rd; push random words; toggle almost-full
  // A read seen at one falling edge is taken by the rising edge that
  // follows, so the word is removed at the next falling edge.
  bit rd_pending = 0;
  always @(negedge clk) if (!rst) begin
    if (rd_pending) begin
      chk(src_q.size() > 0, "read from empty source");
      exp_q.push_back(src_q[0]);
      void'(src_q.pop_front());
    end
    rd_pending = src_rd;
    if (feed && $urandom_range(0, 2) == 0) begin src_q.push_back(ctr); ctr++; end
    toe_tx_afull = feed && ($urandom_range(0, 9) < 3);
  end

  // bus checker, just after the source model has moved the read word over
  logic prev_write = 0;
  always @(negedge clk) if (!rst) begin
    #1;
    if (toe_write) begin
      chk(toe_tx_sop == (burst == 0), "SOP only on first word");
      chk(toe_tx_eop == (burst == FW - 1), "EOP only on last word");
      chk(toe_tx_valid_bytes == 8'hFF, "all bytes valid");
      chk(exp_q.size() > 0 && toe_tx_data == exp_q[0], "data order");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      if (burst > 0) chk(prev_write, "gap inside a frame");
      burst = (burst == FW - 1) ? 0 : burst + 1;
      if (toe_tx_eop) frames++;
    end else begin
      chk(burst == 0, "TOE_WRITE dropped inside a frame");
    end
    chk(!toe_tx_str, "STR low");
    prev_write = toe_write;
  end

  // start rule: the framer may start only with a whole frame and no afull
  always @(posedge clk) if (!rst) begin
    if (!src_rd && src_q.size() >= FW && toe_tx_afull) stalls++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (3000) @(posedge clk);
    feed = 0;
    repeat (200) @(posedge clk);
    chk(frames > 50, $sformatf("frames sent %0d", frames));
    chk(frames_sent == 32'(frames), "frames_sent counter");
    chk(stalls > 0, "almost-full stall exercised");
    chk(src_q.size() < FW, "no whole frame left behind");
    // latency: empty source, afull low, push a whole frame at once
    @(negedge clk);
    while (src_q.size() > 0) void'(src_q.pop_front());
    @(negedge clk);
    begin
      int t0, t1;
      for (int i = 0; i < FW; i++) begin src_q.push_back(ctr); ctr++; end
      t0 = int'($time);
      @(posedge toe_write);
      t1 = int'($time);
      chk((t1 - t0) <= 30, $sformatf("start latency %0d", t1 - t0));
    end
    repeat (20) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
