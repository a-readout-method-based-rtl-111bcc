// tb_data_generator: self-checking test of the rate-controlled payload
// source. For several rates it counts the words credited over a long run
// and checks the rate rate/65536 words per clock to within one word, reads
// frames whenever a whole frame is credited and checks that every frame
// repeats the same payload gen_payload(0..FRAME_WORDS-1), checks that the
// credit saturates at 2*FRAME_WORDS when nothing reads, and that a disabled
// generator offers nothing.
module tb_data_generator;
  import readout_pkg::*;
  localparam int FW = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        enable = 0, rd = 0;
  logic [16:0] rate = 0;
  logic [9:0]  level;
  logic [63:0] data;
  int checks = 0, failures = 0;
  int widx = 0, nread = 0;
  bit reading = 0;

  data_generator #(.FRAME_WORDS(FW)) dut (.*);

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

  // reader: once a whole frame is credited, read it back to back
  int left = 0;
  always @(negedge clk) begin
    if (reading && left == 0 && level >= 10'(FW)) left = FW;
    rd = (left > 0);
    if (rd) begin
      chk(level > 0, "read with no credit");
      chk(data == gen_payload(32'(widx)), $sformatf("payload word %0d", widx));
      widx = (widx + 1) % FW;
      left--;
      nread++;
    end
  end

  task automatic run_rate(input int r, input int cycles);
    int exp_words;
    @(negedge clk);
    rate = 17'(r); nread = 0; reading = 1;
    repeat (cycles) @(negedge clk);
    reading = 0;
    repeat (FW + 2) @(negedge clk);
    exp_words = int'((longint'(r) * cycles) / 65536);
    // words read plus words still credited = words generated
    chk((nread + int'(level)) >= exp_words - 1 && (nread + int'(level)) <= exp_words + FW + 2,
        $sformatf("rate %0d: %0d words in %0d clocks, expected about %0d", r, nread + int'(level), cycles, exp_words));
    // drain the leftover credit so the next rate starts clean
    enable = 0; @(negedge clk); enable = 1; widx = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    chk(level == 0, "disabled generator offers nothing");
    enable = 1;
    run_rate(65536, 4000);          // 10 Gbps
    run_rate(65536 / 2, 4000);      // 5 Gbps
    run_rate(39322, 5000);          // 6 Gbps
    run_rate(6554, 8000);           // 1 Gbps
    // saturation with no reader
    rate = 17'd65536;
    repeat (4 * FW + 10) @(negedge clk);
    chk(level == 10'(2 * FW), $sformatf("credit saturates at %0d (got %0d)", 2 * FW, level));
    chk(nread > 0, "words read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
