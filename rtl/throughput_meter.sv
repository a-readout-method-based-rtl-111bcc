// throughput_meter: counts payload bytes that pass a user-stream bus in
// fixed windows and latches each window's total, as the paper's throughput
// registers do (sampled every 100 us, then read out as Gbps).
//
// With the 156.25 MHz XTOE user clock a 100 us window is 15625 clocks. At the
// last clock of a window the running sum, including that clock's bytes, is
// copied to bytes_per_window and window_tick pulses for one clock. Gbps =
// bytes_per_window * 8 / 100 us. The window length follows the paper; the
// counter structure is this design's choice.
module throughput_meter #(
  parameter int unsigned WINDOW_CYCLES = 15625
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        valid,
  input  logic [7:0]  valid_bytes,
  output logic [31:0] bytes_per_window,
  output logic        window_tick
);
  localparam int unsigned CW = $clog2(WINDOW_CYCLES);

  logic [CW-1:0] cyc;
  logic [31:0]   acc, acc_n;

  assign acc_n = acc + (valid ? 32'(readout_pkg::count_bytes(valid_bytes)) : 32'd0);

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc              <= '0;
      acc              <= '0;
      bytes_per_window <= '0;
      window_tick      <= 1'b0;
    end else begin
      window_tick <= 1'b0;
      if (cyc == CW'(WINDOW_CYCLES - 1)) begin
        cyc              <= '0;
        acc              <= '0;
        bytes_per_window <= acc_n;
        window_tick      <= 1'b1;
      end else begin
        cyc <= cyc + 1'b1;
        acc <= acc_n;
      end
    end
  end

endmodule
