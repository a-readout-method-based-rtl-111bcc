// tb_rbcp_parser: self-checking test of the RBCP parser. A modelled RX_FIFO
// holds a mix of packets: writes of 1..40 bytes, reads, packets with a bad
// Ver/Type, a bad command, zero length, a write without data, a short write
// and a write with surplus bytes. The downstream ready signals are random.
// Checks every command field, every write byte with its last/short flags,
// that bad packets give no command and are counted, and that surplus bytes
// are skipped without losing the next packet.
module tb_rbcp_parser;
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
  logic       rx_empty, rx_rd, cmd_valid, cmd_ready = 0, wb_valid, wb_last, wb_short, wb_ready = 0;
  ustream_t   rx_word;
  rbcp_cmd_t  cmd;
  logic [7:0] wb_byte;
  logic [15:0] bad_pkts;
  int checks = 0, failures = 0;

  ustream_t  fifo_q[$];
  rbcp_cmd_t exp_cmd[$];
  logic [9:0] exp_byte[$];     // {last, short, byte}
  int nbad = 0, ncmd = 0, nbytes = 0;

  rbcp_parser dut (.*);

  assign rx_empty = (fifo_q.size() == 0);
  assign rx_word  = rx_empty ? '0 : fifo_q[0];

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

  task automatic push(input pkt_t p);
    foreach (p[k]) fifo_q.push_back(p[k]);
  endtask

  // one write: len from the header, nb bytes actually carried
  task automatic add_write(input int len, input int nb);
    logic [7:0] b[$];
    logic [31:0] a;
    logic [7:0] id;
    a = $urandom; id = 8'($urandom);
    for (int i = 0; i < nb; i++) b.push_back(8'($urandom));
    push(make_pkt(RBCP_VER_TYPE, RBCP_CMD_WR, id, 8'(len), a, b));
    exp_cmd.push_back('{is_read: 1'b0, id: id, len: 8'(len), addr: a});
    for (int i = 0; i < nb && i < len; i++) begin
      bit last;
      last = (i == len - 1) || (i == nb - 1);
      exp_byte.push_back({last, last && (i != len - 1), b[i]});
    end
  endtask

  task automatic add_read(input int len);
    logic [7:0] b[$];
    logic [31:0] a;
    logic [7:0] id;
    a = $urandom; id = 8'($urandom);
    push(make_pkt(RBCP_VER_TYPE, RBCP_CMD_RD, id, 8'(len), a, b));
    exp_cmd.push_back('{is_read: 1'b1, id: id, len: 8'(len), addr: a});
  endtask

  task automatic add_bad(input int kind);
    logic [7:0] b[$];
    b.push_back(8'h11); b.push_back(8'h22);
    unique case (kind)
      0: push(make_pkt(8'hFE, RBCP_CMD_WR, 8'h1, 8'd2, 32'h0, b));     // bad Ver/Type
      1: push(make_pkt(RBCP_VER_TYPE, 8'h40, 8'h2, 8'd2, 32'h0, b));   // bad command
      2: push(make_pkt(RBCP_VER_TYPE, RBCP_CMD_WR, 8'h3, 8'd0, 32'h0, b)); // zero length
      default: begin b = {}; push(make_pkt(RBCP_VER_TYPE, RBCP_CMD_WR, 8'h4, 8'd4, 32'h0, b)); end // no data
    endcase
    nbad++;
  endtask

  always @(negedge clk) if (!rst) begin
    // the FIFO pop requested now is taken at the next rising edge
    cmd_ready = ($urandom_range(0, 2) != 0);
    wb_ready  = ($urandom_range(0, 2) != 0);
    if (cmd_valid && cmd_ready) begin
      chk(exp_cmd.size() > 0 && cmd == exp_cmd[0], $sformatf("command %0d", ncmd));
      if (exp_cmd.size() > 0) void'(exp_cmd.pop_front());
      ncmd++;
    end
    if (wb_valid && wb_ready) begin
      chk(exp_byte.size() > 0 && {wb_last, wb_short, wb_byte} == exp_byte[0],
          $sformatf("write byte %0d got %h exp %h", nbytes, {wb_last, wb_short, wb_byte}, exp_byte.size() ? exp_byte[0] : 0));
      if (exp_byte.size() > 0) void'(exp_byte.pop_front());
      nbytes++;
    end
  end
  bit rd_pending = 0;
  always @(negedge clk) if (!rst) begin
    if (rd_pending) void'(fifo_q.pop_front());
    #1 rd_pending = rx_rd;
  end

  initial begin
    repeat (3) @(negedge clk);
    for (int k = 0; k < 4; k++) begin add_bad(k); add_read(4); end   // each bad kind once
    for (int n = 0; n < 60; n++) begin
      int k;
      k = $urandom_range(0, 9);
      if (k < 4)      begin int l; l = $urandom_range(1, 40); add_write(l, l); end
      else if (k < 7) add_read($urandom_range(1, 32));
      else if (k < 8) add_bad($urandom_range(0, 3));
      else if (k < 9) begin int l; l = $urandom_range(5, 30); add_write(l, l - 3); end   // short
      else            begin int l; l = $urandom_range(1, 20); add_write(l, l + 9); end   // surplus
    end
    rst = 0;
    wait (fifo_q.size() == 0);
    repeat (100) @(negedge clk);
    chk(exp_cmd.size() == 0, $sformatf("%0d commands missing", exp_cmd.size()));
    chk(exp_byte.size() == 0, $sformatf("%0d bytes missing", exp_byte.size()));
    chk(bad_pkts == 16'(nbad), $sformatf("bad packets %0d vs %0d", bad_pkts, nbad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
