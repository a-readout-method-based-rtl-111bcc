// tb_reg_control: self-checking test of the REGX8 register bank on its byte
// bus. Writes random bytes at random addresses against a reference byte
// array, reads every byte back (one-clock read latency, big-endian lanes),
// checks that read-only registers show their inputs and ignore writes, that
// addresses beyond the bank read as 0 and change nothing, and that the
// register outputs match.
module tb_reg_control;
  import readout_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [31:0] bus_addr = 0;
  logic [7:0]  bus_wdata = 0, bus_rdata;
  logic        bus_we = 0, bus_re = 0;
  logic [31:0] ro_value [NREGS];
  logic [31:0] regs [NREGS];
  logic [7:0]  ref_b [4*NREGS];
  int checks = 0, failures = 0;

  reg_control dut (.*);

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

  task automatic wr(input int a, input logic [7:0] d);
    @(negedge clk); bus_addr = 32'(a); bus_wdata = d; bus_we = 1;
    @(negedge clk); bus_we = 0;
  endtask

  task automatic rd(input int a, output logic [7:0] d);
    @(negedge clk); bus_addr = 32'(a); bus_re = 1;
    @(negedge clk); bus_re = 0; d = bus_rdata;
  endtask

  function automatic logic [7:0] expect_byte(int a);
    int r;
    r = a / 4;
    if (a >= 4 * NREGS) return 8'h00;
    if (REG_RO_MASK[r]) return ro_value[r][31 - 8*(a % 4) -: 8];
    return ref_b[a];
  endfunction

  initial begin
    logic [7:0] d;
    for (int k = 0; k < NREGS; k++) ro_value[k] = {$urandom};
    for (int a = 0; a < 4 * NREGS; a++) ref_b[a] = 8'h00;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int a = 0; a < 4 * NREGS; a++) begin
      rd(a, d);
      chk(d == expect_byte(a), $sformatf("reset value at %0d", a));
    end
    for (int n = 0; n < 300; n++) begin
      int a;
      a = $urandom_range(0, 4 * NREGS + 7);
      d = 8'($urandom);
      wr(a, d);
      if (a < 4 * NREGS && !REG_RO_MASK[a / 4]) ref_b[a] = d;
      a = $urandom_range(0, 4 * NREGS + 7);
      rd(a, d);
      chk(d == expect_byte(a), $sformatf("read %0d: %h vs %h", a, d, expect_byte(a)));
    end
    for (int k = 0; k < NREGS; k++)
      if (!REG_RO_MASK[k])
        chk(regs[k] == {ref_b[4*k], ref_b[4*k+1], ref_b[4*k+2], ref_b[4*k+3]},
            $sformatf("register output %0d", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
