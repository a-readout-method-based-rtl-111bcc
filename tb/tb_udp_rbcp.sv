// tb_udp_rbcp: self-checking test of the whole UDP register-access path,
// with the register bank attached to its bus. A host model sends RBCP
// packets on the XTOE receive bus and collects the replies on the UOE
// transmit bus. Checks: a write is acknowledged with {0xFF, 0x88, ID, Length,
// Address} and changes the registers; a read returns {0xFF, 0xC8, ...} and
// the bytes written; a read-only register reads its input; out-of-range
// commands are answered with the bus-error flag; a malformed packet and TCP
// words (UDP flag low) get no reply; each reply leaves as one gap-free burst
// and waits while the UOE is almost full; reply latency is bounded.
module tb_udp_rbcp;
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
  logic        rx_valid = 0, rx_udp = 0, rx_sop = 0, rx_eop = 0;
  logic [63:0] rx_data = 0;
  logic [7:0]  rx_valid_bytes = 0;
  logic        uoe_tx_afull = 0, uoe_write, uoe_tx_sop, uoe_tx_eop;
  logic [63:0] uoe_tx_data;
  logic [7:0]  uoe_tx_valid_bytes;
  logic [31:0] bus_addr;
  logic [7:0]  bus_wdata, bus_rdata;
  logic        bus_we, bus_re;
  logic [15:0] bad_pkts, rx_overflows, acks_sent, replies_sent;
  logic [31:0] ro_value [NREGS];
  logic [31:0] regs [NREGS];
  int checks = 0, failures = 0;
  pkt_t rx_pkts[$];
  ustream_t cur[$];
  int in_burst = 0, afull_stalls = 0;

  udp_rbcp dut (.*);
  reg_control u_regs (.clk, .rst, .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata, .ro_value, .regs);

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

  // ---- host side: send one packet as a gap-free burst on the XTOE receive bus ----
  task automatic host_send(input pkt_t p, input bit udp);
    foreach (p[k]) begin
      @(negedge clk);
      rx_valid = 1; rx_udp = udp; rx_sop = p[k].sop; rx_eop = p[k].eop;
      rx_data = p[k].data; rx_valid_bytes = p[k].valid_bytes;
    end
    @(negedge clk);
    rx_valid = 0; rx_sop = 0; rx_eop = 0; rx_udp = 0;
  endtask

  // UOE transmit side: collect packets, check the burst is gap-free
  logic prev_write = 0;
  always @(negedge clk) if (!rst) begin
    if (uoe_write) begin
      ustream_t w;
      w = '{sop: uoe_tx_sop, eop: uoe_tx_eop, valid_bytes: uoe_tx_valid_bytes, data: uoe_tx_data};
      chk(w.sop == (cur.size() == 0), "SOP on first reply word only");
      if (cur.size() > 0) chk(prev_write, "gap inside a reply burst");
      cur.push_back(w);
      if (w.eop) begin rx_pkts.push_back(cur); cur = {}; end
    end
    prev_write = uoe_write;
    if (uoe_tx_afull && dut.tx_pkts != 0 && !dut.sending) afull_stalls++;
  end

  task automatic expect_reply(input pkt_t e, input int max_cycles, input string what);
    int t;
    t = 0;
    while (rx_pkts.size() == 0 && t < max_cycles) begin @(negedge clk); t++; end
    chk(rx_pkts.size() > 0, $sformatf("%s: reply within %0d clocks", what, max_cycles));
    if (rx_pkts.size() > 0) begin
      chk(rx_pkts[0] == e, $sformatf("%s: reply contents", what));
      void'(rx_pkts.pop_front());
    end
  endtask

  initial begin
    logic [7:0] none[$];
    logic [7:0] b[$];
    logic [7:0] rb[$];
    for (int k = 0; k < NREGS; k++) ro_value[k] = 32'hA5000000 + k;
    repeat (3) @(negedge clk);
    rst = 0;
    // write 8 bytes at address 8 (registers 2 and 3)
    for (int i = 0; i < 8; i++) b.push_back(8'h10 + 8'(i));
    host_send(make_pkt(RBCP_VER_TYPE, RBCP_CMD_WR, 8'h21, 8'd8, 32'd8, b), 1);
    expect_reply(make_pkt(RBCP_VER_TYPE, 8'h88, 8'h21, 8'd8, 32'd8, none), 60, "write");
    chk(regs[2] == 32'h10111213 && regs[3] == 32'h14151617, "registers written");
    // read them back, then register 6 (read only)
    host_send(make_pkt(RBCP_VER_TYPE, RBCP_CMD_RD, 8'h22, 8'd8, 32'd8, none), 1);
    expect_reply(make_pkt(RBCP_VER_TYPE, 8'hC8, 8'h22, 8'd8, 32'd8, b), 80, "read back");
    rb = {8'hA5, 8'h00, 8'h00, 8'h06};
    host_send(make_pkt(RBCP_VER_TYPE, RBCP_CMD_RD, 8'h23, 8'd4, 32'd24, none), 1);
    expect_reply(make_pkt(RBCP_VER_TYPE, 8'hC8, 8'h23, 8'd4, 32'd24, rb), 60, "read-only register");
    // out of range
    host_send(make_pkt(RBCP_VER_TYPE, RBCP_CMD_RD, 8'h24, 8'd4, 32'd30, none), 1);
    expect_reply(make_pkt(RBCP_VER_TYPE, 8'hC9, 8'h24, 8'd4, 32'd30, none), 60, "out-of-range read");
    host_send(make_pkt(RBCP_VER_TYPE, RBCP_CMD_WR, 8'h25, 8'd2, 32'h100, b[0:1]), 1);
    expect_reply(make_pkt(RBCP_VER_TYPE, 8'h89, 8'h25, 8'd2, 32'h100, none), 60, "out-of-range write");
    // malformed and TCP traffic: no reply
    host_send(make_pkt(8'h00, RBCP_CMD_WR, 8'h26, 8'd2, 32'd0, b[0:1]), 1);
    host_send(make_pkt(RBCP_VER_TYPE, RBCP_CMD_WR, 8'h27, 8'd8, 32'd0, b), 0);
    repeat (80) @(negedge clk);
    chk(rx_pkts.size() == 0, "no reply to a malformed packet or to TCP data");
    chk(bad_pkts == 1, "malformed packet counted");
    chk(regs[0] == 0 && regs[1] == 0, "TCP data did not write registers");
    // UOE almost full: replies wait, then leave
    uoe_tx_afull = 1;
    host_send(make_pkt(RBCP_VER_TYPE, RBCP_CMD_RD, 8'h28, 8'd20, 32'd0, none), 1);
    repeat (100) @(negedge clk);
    chk(rx_pkts.size() == 0 && cur.size() == 0, "reply held while UOE almost full");
    chk(afull_stalls > 0, "almost-full stall seen");
    uoe_tx_afull = 0;
    rb = {};
    for (int i = 0; i < 8; i++) rb.push_back(8'h00);
    for (int i = 0; i < 8; i++) rb.push_back(b[i]);
    rb.push_back(8'h00); rb.push_back(8'h00); rb.push_back(8'h00); rb.push_back(8'h00);
    expect_reply(make_pkt(RBCP_VER_TYPE, 8'hC8, 8'h28, 8'd20, 32'd0, rb), 40, "held read");
    chk(acks_sent == 3 && replies_sent == 3, $sformatf("acks %0d replies %0d", acks_sent, replies_sent));
    chk(rx_overflows == 0, "no RX_FIFO overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
