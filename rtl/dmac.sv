// dmac: the bus controller of the UDP path (DMAC in the paper's UDP parsing
// figure, which draws its ADDR and DATA outputs to the registers). It turns
// an RBCP command into byte-wide bus cycles and hands the outcome to the two
// reply builders.
//
// Write: each data byte from the parser is written at addr, addr+1, ... one
// per clock (bus_we). After the byte marked last an acknowledge descriptor
// goes to ACK_REQUEST, with Length set to the bytes written and the bus-error
// flag set when the packet was short. Read: a reply descriptor goes to
// PACKET_COMPOSE first (it sends the header), then each byte is read
// (bus_re, data on bus_rdata from the next clock until the next access) and
// passed on, two clocks per byte. A command whose range addr..addr+len-1
// leaves the ADDR_BYTES register space makes no bus access: its data bytes
// are consumed and ACK_REQUEST answers with the bus-error flag.
//
// All handshakes are valid/ready. The byte-wide bus, the range check and the
// sequencing are this design's choices.
module dmac
  import readout_pkg::*;
#(
  parameter int unsigned ADDR_BYTES = 4 * NREGS
) (
  input  logic        clk,
  input  logic        rst,
  // command and write bytes from the parser
  input  logic        cmd_valid,
  input  rbcp_cmd_t   cmd,
  output logic        cmd_ready,
  input  logic        wb_valid,
  input  logic [7:0]  wb_byte,
  input  logic        wb_last,
  input  logic        wb_short,
  output logic        wb_ready,
  // register bus
  output logic [31:0] bus_addr,
  output logic [7:0]  bus_wdata,
  output logic        bus_we,
  output logic        bus_re,
  input  logic [7:0]  bus_rdata,
  // to ACK_REQUEST
  output logic        ack_valid,
  output rbcp_reply_t ack,
  input  logic        ack_ready,
  // to PACKET_COMPOSE
  output logic        rd_start_valid,
  output rbcp_reply_t rd_start,
  input  logic        rd_start_ready,
  output logic        rb_valid,
  output logic [7:0]  rb_byte,
  output logic        rb_last,
  input  logic        rb_ready
);
  typedef enum logic [2:0] {S_IDLE, S_WRITE, S_WDRAIN, S_ACK, S_RSTART, S_RISSUE, S_RWAIT} state_t;
  state_t      state;
  rbcp_cmd_t   c;
  logic [7:0]  cnt;
  logic        err;
  logic        in_range;

  assign in_range = (33'(cmd.addr) + 33'(cmd.len)) <= 33'(ADDR_BYTES);

  always_comb begin
    cmd_ready      = (state == S_IDLE);
    wb_ready       = (state == S_WRITE) || (state == S_WDRAIN);
    bus_addr       = c.addr + 32'(cnt);
    bus_wdata      = wb_byte;
    bus_we         = (state == S_WRITE) && wb_valid;
    bus_re         = (state == S_RISSUE);
    ack_valid      = (state == S_ACK);
    ack            = '{is_read: c.is_read, bus_err: err, id: c.id, len: cnt, addr: c.addr};
    rd_start_valid = (state == S_RSTART);
    rd_start       = '{is_read: 1'b1, bus_err: 1'b0, id: c.id, len: c.len, addr: c.addr};
    rb_valid       = (state == S_RWAIT);
    rb_byte        = bus_rdata;
    rb_last        = (cnt == c.len - 8'd1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      c     <= '0;
      cnt   <= '0;
      err   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c   <= cmd;
          cnt <= '0;
          err <= !in_range;
          if (cmd.is_read) state <= in_range ? S_RSTART : S_ACK;
          else             state <= in_range ? S_WRITE  : S_WDRAIN;
          if (cmd.is_read && !in_range) cnt <= cmd.len;
        end
        S_WRITE: if (wb_valid) begin
          cnt <= cnt + 1'b1;
          if (wb_last) begin
            err   <= wb_short;
            state <= S_ACK;
          end
        end
        S_WDRAIN: if (wb_valid && wb_last) begin
          cnt   <= c.len;
          state <= S_ACK;
        end
        S_ACK:    if (ack_ready) state <= S_IDLE;
        S_RSTART: if (rd_start_ready) state <= S_RISSUE;
        S_RISSUE: state <= S_RWAIT;
        S_RWAIT:  if (rb_ready) begin
          cnt   <= cnt + 1'b1;
          state <= rb_last ? S_IDLE : S_RISSUE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
