// tb_data_checker: self-checking test of the received-payload checker. Sends
// good frames with random idle clocks (no errors expected), then frames with
// one corrupted word, a frame with EOP one word early, and checks the word
// and error counters against the numbers injected, and that clear resets
// them. A random phase then flips one random bit in about a quarter of
// 200 frames and checks the error count after every frame.
module tb_data_checker;
  import readout_pkg::*;
  localparam int FW = 12;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        clear = 0, valid = 0, sop = 0, eop = 0;
  logic [63:0] data = 0;
  logic [31:0] words;
  logic [15:0] errors;
  int checks = 0, failures = 0;
  int sent = 0;
  int flip_bit = 40;

  data_checker #(.FRAME_WORDS(FW)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #500000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // len: words in the frame; bad_word: index to corrupt, -1 for none
  task automatic frame(input int len, input int bad_word);
    for (int w = 0; w < len; w++) begin
      @(negedge clk);
      valid = 1; sop = (w == 0); eop = (w == len - 1);
      data  = gen_payload(32'(w)) ^ ((w == bad_word) ? (64'd1 << flip_bit) : 64'h0);
      sent++;
      if ($urandom_range(0, 3) == 0) begin @(negedge clk); valid = 0; sop = 0; eop = 0; end
    end
    @(negedge clk); valid = 0; sop = 0; eop = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < 20; f++) frame(FW, -1);
    @(negedge clk);
    chk(errors == 0, $sformatf("good frames give no errors (%0d)", errors));
    chk(words == 32'(sent), "word count");
    frame(FW, 3);
    frame(FW, FW - 1);
    frame(FW, -1);
    @(negedge clk);
    chk(errors == 2, $sformatf("two corrupted words counted (%0d)", errors));
    frame(FW - 1, -1);   // EOP one word early
    @(negedge clk);
    chk(errors == 3, $sformatf("short frame counted (%0d)", errors));
    chk(words == 32'(sent), "word count after errors");
    clear = 1; @(negedge clk); clear = 0; @(negedge clk);
    chk(errors == 0 && words == 0, "clear");
    // random phase: one flipped bit, anywhere, in about a quarter of the frames
    begin
      int exp_err;
      exp_err = 0; sent = 0;
      for (int f = 0; f < 200; f++) begin
        int bw;
        bw = ($urandom_range(0, 3) == 0) ? $urandom_range(0, FW - 1) : -1;
        flip_bit = $urandom_range(0, 63);
        frame(FW, bw);
        if (bw >= 0) exp_err++;
        @(negedge clk);
        chk(errors == 16'(exp_err), $sformatf("frame %0d: errors %0d expected %0d", f, errors, exp_err));
        chk(words == 32'(sent), "word count in the random phase");
      end
      chk(exp_err > 20, "enough corrupted frames");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
