// tb_udp_tx_mux: self-checking test of the reply multiplexer. Two sources
// offer packets of 1..5 words at random times while TX_FIFO's full flag
// toggles. Checks that no word moves while full, that packets never
// interleave (SOP..EOP from one source at a time), that each source's words
// arrive in order, and that both sources are served.
module tb_udp_tx_mux;
  import readout_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [1:0] in_valid, in_ready;
  ustream_t   in_word [2];
  logic       out_wr, out_full = 0;
  ustream_t   out_word;
  int checks = 0, failures = 0;
  ustream_t src_q [2][$];
  ustream_t exp_q [2][$];
  int cur = -1, npk [2], nwords = 0;

  udp_tx_mux dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb
    for (int s = 0; s < 2; s++) begin
      in_valid[s] = src_q[s].size() > 0;
      in_word[s]  = src_q[s].size() > 0 ? src_q[s][0] : '0;
    end

  task automatic add_pkt(input int s, input int n);
    for (int k = 0; k < n; k++) begin
      ustream_t w;
      w = '{sop: (k == 0), eop: (k == n - 1), valid_bytes: 8'hFF,
            data: {8'(s), 24'(npk[s]), 32'(k)}};
      src_q[s].push_back(w); exp_q[s].push_back(w);
    end
    npk[s]++;
  endtask

  always @(posedge clk) begin #1; out_full = ($urandom_range(0, 3) == 0); end

  // transfers seen at the falling edge happen at the next rising edge
  always @(negedge clk) if (!rst) begin
    if (out_wr) begin
      int s;
      chk(!out_full, "write while full");
      s = int'(out_word.data[63:56]);
      chk(in_ready[s] && in_valid[s], "ready/valid of the chosen input");
      chk(exp_q[s].size() > 0 && out_word == exp_q[s][0], "word order of a source");
      if (out_word.sop) begin chk(cur < 0, "SOP inside another packet"); cur = s; end
      else chk(cur == s, "packets interleaved");
      if (out_word.eop) cur = -1;
      if (exp_q[s].size() > 0) void'(exp_q[s].pop_front());
      pop_pending[s] = 1'b1;
      nwords++;
    end
  end

  // source updates just after the rising edge that took the word
  logic [1:0] pop_pending = '0;
  always @(posedge clk) begin
    #2;
    for (int s = 0; s < 2; s++) if (pop_pending[s]) void'(src_q[s].pop_front());
    pop_pending = '0;
    if (!rst && $urandom_range(0, 9) == 0 && npk[0] < 100) add_pkt(0, $urandom_range(1, 5));
    if (!rst && $urandom_range(0, 9) == 0 && npk[1] < 100) add_pkt(1, $urandom_range(1, 5));
  end

  initial begin
    npk[0] = 0; npk[1] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    wait (npk[0] == 100 && npk[1] == 100);
    repeat (500) @(negedge clk);
    chk(exp_q[0].size() == 0 && exp_q[1].size() == 0, "all packets delivered");
    chk(nwords > 400, $sformatf("words moved %0d", nwords));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
