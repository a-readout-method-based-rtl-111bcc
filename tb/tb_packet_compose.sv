// tb_packet_compose: self-checking test of the read-reply builder. For
// random lengths 1..40 it gives a start descriptor and the bytes with random
// valid gaps and random downstream ready, and checks the reply: SOP header
// word {0xFF, 0xC8, ID, Length, Address}, then the bytes eight to a word from
// DATA[63:56] down, EOP on the last word with VALID_BYTES marking its filled
// top lanes.
module tb_packet_compose;
  import readout_pkg::*;
  // ---- RBCP packet helpers: header word, then data bytes from DATA[63:56] down ----
  typedef ustream_t pkt_t[$];
  function automatic pkt_t make_pkt(input logic [7:0] ver, input logic [7:0] cmdf,
                                    input logic [7:0] id, input logic [7:0] len,
                                    input logic [31:0] addr, input logic [7:0] bytes[$]);
    pkt_t p;
    ustream_t w;
    w = '{sop: 1'b1, eop: (bytes.size() == 0), valid_bytes: 8'hFF, data: {ver, cmdf, id, len, addr}};
    p.push_back(w);
    for (int i = 0; i < bytes.size(); i += 8) begin
      w = '{sop: 1'b0, eop: 1'b0, valid_bytes: 8'h00, data: 64'h0};
      for (int k = 0; k < 8 && i + k < bytes.size(); k++) begin
        w.data[63 - 8*k -: 8] = bytes[i + k];
        w.valid_bytes[7 - k]  = 1'b1;
      end
      w.eop = (i + 8 >= bytes.size());
      p.push_back(w);
    end
    return p;
  endfunction
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        start_valid = 0, start_ready, rb_valid = 0, rb_last = 0, rb_ready;
  logic        out_valid, out_ready = 0;
  rbcp_reply_t start = '0;
  logic [7:0]  rb_byte = 0;
  ustream_t    out_word;
  logic [15:0] replies_sent;
  int checks = 0, failures = 0;
  ustream_t exp_q[$];
  int npkt = 0;

  packet_compose dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin #1; out_ready = ($urandom_range(0, 2) != 0); end

  always @(negedge clk) if (out_valid && out_ready) begin
    chk(exp_q.size() > 0 && out_word == exp_q[0],
        $sformatf("reply word %h vs %h", out_word, exp_q.size() ? exp_q[0] : '0));
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  task automatic reply(input int len);
    logic [7:0] b[$];
    pkt_t p;
    rbcp_reply_t r;
    r = '{is_read: 1'b1, bus_err: 1'b0, id: 8'($urandom), len: 8'(len), addr: $urandom};
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    p = make_pkt(RBCP_VER_TYPE, 8'hC8, r.id, r.len, r.addr, b);
    foreach (p[k]) exp_q.push_back(p[k]);
    @(negedge clk); start = r; start_valid = 1;
    while (!start_ready) @(negedge clk);
    @(negedge clk); start_valid = 0;
    for (int i = 0; i < len; i++) begin
      repeat ($urandom_range(0, 2)) @(negedge clk);
      rb_valid = 1; rb_byte = b[i]; rb_last = (i == len - 1);
      while (!rb_ready) @(negedge clk);
      @(negedge clk); rb_valid = 0;
    end
    npkt++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 100; n++) reply($urandom_range(1, 40));
    for (int l = 1; l <= 9; l++) reply(l);
    repeat (50) @(negedge clk);
    chk(exp_q.size() == 0, $sformatf("%0d words missing", exp_q.size()));
    chk(replies_sent == 16'(npkt), "reply counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
