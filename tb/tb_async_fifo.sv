// tb_async_fifo: self-checking test of the dual-clock FIFO. Writes on an
// 80 MHz clock and reads on a 156.25 MHz clock with random enables, and
// compares every word read with a reference queue. Then fills the FIFO with
// the reader stopped and checks that exactly DEPTH words are accepted, that
// full is set, and that rlevel settles to DEPTH.
// Stimulus is applied at the falling edge; a transfer is counted when the
// enable is high and the flag (stable until the rising edge) allows it.
module tb_async_fifo;
  localparam int DEPTH = 16;
  localparam int NWORDS = 600;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  always #6 wclk = ~wclk;
  always #3 rclk = ~rclk;

  logic        wr_en = 0, rd_en = 0, full, empty;
  logic [63:0] wdata = 0, rdata;
  logic [4:0]  rlevel;
  int checks = 0, failures = 0;
  logic [63:0] q[$];
  int nwritten = 0, nread = 0;
  bit wr_go = 0, rd_go = 0, wr_fill = 0;
  int w_pct = 60, r_pct = 30;

  async_fifo #(.WIDTH(64), .DEPTH(DEPTH)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #400000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge wclk) begin
    wr_en = wr_go && (nwritten < NWORDS || wr_fill) && ($urandom_range(0, 99) < w_pct);
    wdata = {$urandom, $urandom};
    if (wr_en && !full) begin q.push_back(wdata); nwritten++; end
  end

  always @(negedge rclk) begin
    rd_en = rd_go && ($urandom_range(0, 99) < r_pct);
    if (rd_en && !empty) begin
      chk(q.size() > 0 && rdata == q[0], $sformatf("word %0d mismatch", nread));
      if (q.size() > 0) void'(q.pop_front());
      nread++;
    end
  end

  initial begin
    repeat (4) @(posedge wclk);
    wrst = 0; rrst = 0;
    repeat (4) @(posedge wclk);
    wr_go = 1; rd_go = 1;
    wait (nread == NWORDS);
    chk(q.size() == 0, "reference queue drained");
    // fill with the reader stopped
    rd_go = 0; wr_go = 0; w_pct = 100;
    repeat (10) @(posedge wclk);
    nwritten = 0; wr_fill = 1; wr_go = 1;
    repeat (DEPTH + 10) @(posedge wclk);
    wr_go = 0;
    repeat (4) @(posedge wclk);
    chk(full, "full after filling");
    chk(nwritten == DEPTH, $sformatf("accepted %0d words, expected %0d", nwritten, DEPTH));
    repeat (6) @(posedge rclk);
    chk(rlevel == 5'(DEPTH), $sformatf("rlevel %0d", rlevel));
    nread = 0; r_pct = 100; rd_go = 1;
    repeat (DEPTH + 10) @(posedge rclk);
    chk(nread == DEPTH, "drained DEPTH words");
    chk(empty, "empty after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
