// tb_throughput_meter: self-checking test of the windowed byte counter.
// Drives random valid words with random VALID_BYTES masks, sums the bytes
// of each window independently, and checks every latched window total, the
// tick period (WINDOW_CYCLES clocks) and a full-rate window
// (8 bytes x WINDOW_CYCLES).
module tb_throughput_meter;
  localparam int WIN = 50;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        valid = 0;
  logic [7:0]  valid_bytes = 0;
  logic [31:0] bytes_per_window;
  logic        window_tick;
  int checks = 0, failures = 0;
  int acc = 0, cyc = 0, last_tick = -1, ticks = 0;
  int exp_q[$];
  bit full_rate = 0;

  throughput_meter #(.WINDOW_CYCLES(WIN)) dut (.*);

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

  always @(negedge clk) if (!rst) begin
    if (window_tick) begin
      chk(exp_q.size() > 0 && bytes_per_window == 32'(exp_q[0]),
          $sformatf("window total %0d", bytes_per_window));
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      if (last_tick >= 0) chk(cyc - last_tick == WIN, "tick period");
      last_tick = cyc;
      ticks++;
    end
    // stimulus for the coming clock, counted into the reference window
    valid       = full_rate || ($urandom_range(0, 1) == 1);
    valid_bytes = full_rate ? 8'hFF : 8'($urandom);
    if (valid) acc += $countones(valid_bytes);
    if (cyc % WIN == WIN - 1) begin exp_q.push_back(acc); acc = 0; end
    cyc++;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    repeat (10 * WIN) @(negedge clk);
    full_rate = 1;
    repeat (3 * WIN) @(negedge clk);
    chk(bytes_per_window == 32'(8 * WIN), "full-rate window = 8 bytes x window");
    chk(ticks >= 12, $sformatf("ticks %0d", ticks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
