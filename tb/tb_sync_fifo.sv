// tb_sync_fifo: self-checking test of the single-clock FIFO with random
// writes and reads against a reference queue; checks data order, count,
// full and empty every clock.
module tb_sync_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        wr_en = 0, rd_en = 0, full, empty;
  logic [15:0] wdata = 0, rdata;
  logic [3:0]  count;
  int checks = 0, failures = 0;
  logic [15:0] q[$];

  sync_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      chk(count == 4'(q.size()), $sformatf("count %0d vs %0d", count, q.size()));
      chk(full == (q.size() == DEPTH), "full flag");
      chk(empty == (q.size() == 0), "empty flag");
      if (q.size() > 0) chk(rdata == q[0], "head word");
      // bias towards filling in the first half and draining in the second
      wr_en = (cyc < 1500) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      rd_en = (cyc < 1500) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      wdata = 16'($urandom);
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, updated on the clock edge from the pre-edge state
  always @(posedge clk) if (!rst) begin
    bit do_push, do_pop;
    do_push = wr_en && (q.size() < DEPTH);
    do_pop  = rd_en && (q.size() > 0);
    if (do_pop)  void'(q.pop_front());
    if (do_push) q.push_back(wdata);
  end
endmodule
