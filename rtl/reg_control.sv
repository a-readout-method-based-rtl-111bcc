// reg_control: the REG control block with its register bank ("REGX8" in the
// paper's firmware figure): eight 32-bit registers that the host reads and
// writes over UDP. Their contents drive the BPIX configuration (GDAC load,
// chain load, array write), the trigger setting and the data-source
// controls; two of them are read-only views of status counters, which gives
// the host its read back of what the board measures.
//
// Bus: byte wide and byte addressed. Register k occupies addresses 4k..4k+3,
// the lowest address being bits [31:24] (network byte order, as the bytes
// arrive in RBCP). bus_we writes wdata in the same clock; bus_re returns the
// byte on rdata from the next clock, held until the next read. Writes to
// read-only registers (RO_MASK) and accesses beyond the bank are ignored;
// reads beyond it return 0. Registers reset to 0. The count of eight follows
// the figure; width, map and bus are this design's choices.
module reg_control
  import readout_pkg::*;
#(
  parameter int unsigned         N       = NREGS,
  parameter logic [NREGS-1:0]    RO_MASK = REG_RO_MASK
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] bus_addr,
  input  logic [7:0]  bus_wdata,
  input  logic        bus_we,
  input  logic        bus_re,
  output logic [7:0]  bus_rdata,
  input  logic [31:0] ro_value [N],   // read-only register contents
  output logic [31:0] regs [N]
);
  localparam int unsigned IW = $clog2(N);

  logic          hit;
  logic [IW-1:0] ri;
  logic [1:0]    lane;
  logic [31:0]   rword;

  assign hit   = (bus_addr < 32'(4 * N));
  assign ri    = bus_addr[IW+1:2];
  assign lane  = bus_addr[1:0];
  assign rword = RO_MASK[ri] ? ro_value[ri] : regs[ri];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < int'(N); k++) regs[k] <= '0;
      bus_rdata <= '0;
    end else begin
      if (bus_we && hit && !RO_MASK[ri])
        regs[ri][31 - 8*lane -: 8] <= bus_wdata;
      if (bus_re)
        bus_rdata <= hit ? rword[31 - 8*lane -: 8] : 8'h00;
    end
  end

endmodule
