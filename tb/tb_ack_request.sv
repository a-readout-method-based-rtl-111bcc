// tb_ack_request: self-checking test of the write-acknowledge builder. Random
// descriptors with random downstream ready; each must come out as one word
// with SOP and EOP set, all bytes valid, and the RBCP reply header
// {0xFF, CMD|ACK|error, ID, Length, Address} computed here independently.
module tb_ack_request;
  import readout_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic        ack_valid = 0, ack_ready, out_valid, out_ready = 0;
  rbcp_reply_t ack = '0;
  ustream_t    out_word;
  logic [15:0] acks_sent;
  int checks = 0, failures = 0;
  logic [63:0] exp_q[$];
  int nin = 0, nout = 0;

  ack_request dut (.*);

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

  always @(posedge clk) begin
    #1;
    out_ready = ($urandom_range(0, 2) != 0);
    if (!rst && !(ack_valid && !ack_ready_q)) begin
      // new descriptor (or none) once the previous one was taken
      ack_valid = ($urandom_range(0, 1) == 1) && nin < 200;
      ack = '{is_read: 1'($urandom), bus_err: 1'($urandom), id: 8'($urandom),
              len: 8'($urandom), addr: $urandom};
      if (ack_valid) begin
        exp_q.push_back({8'hFF, (ack.is_read ? 8'hC0 : 8'h80) | 8'h08 | (ack.bus_err ? 8'h01 : 8'h00),
                         ack.id, ack.len, ack.addr});
      end
    end
  end
  // ready as seen by the rising edge that just passed
  logic ack_ready_q = 1;
  always @(negedge clk) begin
    if (ack_valid && ack_ready) nin++;
    ack_ready_q = !(ack_valid && !ack_ready);
    if (out_valid && out_ready) begin
      chk(exp_q.size() > 0 && out_word.data == exp_q[0], "ack header");
      chk(out_word.sop && out_word.eop && out_word.valid_bytes == 8'hFF, "single-word packet");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      nout++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    wait (nin >= 200);
    repeat (20) @(negedge clk);
    chk(nout == nin && exp_q.size() == 0, $sformatf("acks out %0d in %0d", nout, nin));
    chk(acks_sent == 16'(nin), "ack counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
