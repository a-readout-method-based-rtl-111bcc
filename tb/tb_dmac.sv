// tb_dmac: self-checking test of the RBCP bus controller against a modelled
// 32-byte register space (write in the clock, read data from the next
// clock). Random writes, short writes, reads and out-of-range commands with
// random ready signals. Checks the bytes written at addr..addr+len-1, the
// acknowledge descriptor (Length written, bus-error flag), the read reply
// descriptor and bytes, that out-of-range commands touch nothing, and the
// read rate of two clocks per byte.
module tb_dmac;
  import readout_pkg::*;
  localparam int AB = 32;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        cmd_valid = 0, cmd_ready, wb_valid = 0, wb_last = 0, wb_short = 0, wb_ready;
  rbcp_cmd_t   cmd = '0;
  logic [7:0]  wb_byte = 0;
  logic [31:0] bus_addr;
  logic [7:0]  bus_wdata, bus_rdata = 0;
  logic        bus_we, bus_re;
  logic        ack_valid, ack_ready = 0, rd_start_valid, rd_start_ready = 0;
  logic        rb_valid, rb_last, rb_ready = 0;
  rbcp_reply_t ack, rd_start;
  logic [7:0]  rb_byte;
  int checks = 0, failures = 0;
  logic [7:0]  mem [AB];
  logic [7:0]  ref_m [AB];
  bit          rnd_ready = 1;

  dmac #(.ADDR_BYTES(AB)) dut (.*);

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

  // register space model
  always @(posedge clk) begin
    if (bus_we) begin
      if (bus_addr < AB) mem[bus_addr[4:0]] <= bus_wdata;
      else begin failures++; $display("FAIL: write outside the space"); end
    end
    if (bus_re) bus_rdata <= (bus_addr < AB) ? mem[bus_addr[4:0]] : 8'hXX;
  end

  // ready signals change just after the rising edge, stable at the falling edge
  always @(posedge clk) begin
    #1;
    ack_ready      = !rnd_ready || ($urandom_range(0, 1) == 1);
    rd_start_ready = !rnd_ready || ($urandom_range(0, 1) == 1);
    rb_ready       = !rnd_ready || ($urandom_range(0, 1) == 1);
  end

  task automatic expect_ack(input rbcp_reply_t e);
    while (!(ack_valid && ack_ready)) @(negedge clk);
    chk(ack == e, $sformatf("ack %p vs %p", ack, e));
    @(negedge clk);
  endtask

  task automatic do_write(input int a, input int len, input int nb);
    rbcp_cmd_t c;
    c = '{is_read: 1'b0, id: 8'($urandom), len: 8'(len), addr: 32'(a)};
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    for (int i = 0; i < nb; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      wb_valid = 1; wb_byte = b; wb_last = (i == nb - 1); wb_short = (i == nb - 1) && (nb < len);
      while (!wb_ready) @(negedge clk);
      if (a + len <= AB) ref_m[a + i] = b;
      @(negedge clk);
      wb_valid = 0;
    end
    expect_ack('{is_read: 1'b0, bus_err: (nb < len) || (a + len > AB), id: c.id,
                 len: (a + len > AB) ? 8'(len) : 8'(nb), addr: 32'(a)});
  endtask

  task automatic do_read(input int a, input int len);
    rbcp_cmd_t c;
    int t0;
    c = '{is_read: 1'b1, id: 8'($urandom), len: 8'(len), addr: 32'(a)};
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    if (a + len > AB) begin
      expect_ack('{is_read: 1'b1, bus_err: 1'b1, id: c.id, len: 8'(len), addr: 32'(a)});
      return;
    end
    while (!(rd_start_valid && rd_start_ready)) @(negedge clk);
    chk(rd_start == '{is_read: 1'b1, bus_err: 1'b0, id: c.id, len: 8'(len), addr: 32'(a)}, "read descriptor");
    t0 = int'($time);
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      while (!(rb_valid && rb_ready)) @(negedge clk);
      chk(rb_byte == ref_m[a + i], $sformatf("read byte %0d at %0d", i, a + i));
      chk(rb_last == (i == len - 1), "read last flag");
    end
    if (!rnd_ready) chk(int'($time) - t0 == 20 * len, $sformatf("read rate: %0d ns for %0d bytes", int'($time) - t0, len));
  endtask

  initial begin
    for (int i = 0; i < AB; i++) begin mem[i] = 8'h00; ref_m[i] = 8'h00; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 80; n++) begin
      int a, l, k;
      a = $urandom_range(0, AB - 1);
      l = $urandom_range(1, AB - a);
      k = $urandom_range(0, 9);
      if (k < 4)      do_write(a, l, l);
      else if (k < 5) do_write(a, l + 2, l);                       // short packet
      else if (k < 6) do_write(a, AB - a + 3, 2);                  // out of range
      else if (k < 7) do_read(a, AB - a + 1);                      // out of range
      else            do_read(a, l);
    end
    rnd_ready = 0;
    do_write(0, AB, AB);
    do_read(0, AB);
    for (int i = 0; i < AB; i++) chk(mem[i] == ref_m[i], $sformatf("register byte %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
