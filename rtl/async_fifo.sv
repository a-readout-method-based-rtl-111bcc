// async_fifo: dual-clock FIFO that carries payload words from the 80 MHz user
// clock domain (data read out of the DDR3 cache) into the 156.25 MHz XTOE
// user-interface domain, absorbing both the clock crossing and the bandwidth
// mismatch between the two sides.
//
// Classic Gray-code pointer design: each side keeps a binary and a Gray
// pointer one bit wider than the address; the Gray pointer of the other side
// is brought over through a two-flop synchroniser. Full and empty are
// registered from those comparisons, so both are pessimistic by the
// synchroniser delay, never optimistic. The read port is first-word
// fall-through: rdata shows the head word whenever empty is low, and rd_en
// pops it. rlevel is the number of words the read side knows to be present
// (it lags writes by about three read clocks); the frame sender uses it to
// start a burst only when a whole frame is in the FIFO.
//
// Interface: wr_en is ignored while full, rd_en while empty. Each side has its
// own synchronous active-high reset; both must be asserted together.
// That the FIFO exists and what it is for follow the paper; its depth,
// structure and reset are this design's choices.
module async_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 512      // power of two
) (
  input  logic                       wclk,
  input  logic                       wrst,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wdata,
  output logic                       full,

  input  logic                       rclk,
  input  logic                       rrst,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rdata,
  output logic                       empty,
  output logic [$clog2(DEPTH):0]     rlevel
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;    // read pointer in write domain
  logic [AW:0] wgray_r1, wgray_r2;    // write pointer in read domain

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write side ----------------
  logic        wpush;
  logic [AW:0] wbin_n, wgray_n;
  assign wpush   = wr_en && !full;
  assign wbin_n  = wbin + (AW+1)'(wpush);
  assign wgray_n = bin2gray(wbin_n);

  always_ff @(posedge wclk) begin
    if (wpush) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0; full <= 1'b0;
    end else begin
      wbin     <= wbin_n;
      wgray    <= wgray_n;
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      full     <= (wgray_n == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
    end
  end

  // ---------------- read side ----------------
  logic        rpop;
  logic [AW:0] rbin_n, rgray_n, wbin_r;
  assign rpop    = rd_en && !empty;
  assign rbin_n  = rbin + (AW+1)'(rpop);
  assign rgray_n = bin2gray(rbin_n);
  assign wbin_r  = gray2bin(wgray_r2);
  assign rdata   = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
      empty <= 1'b1; rlevel <= '0;
    end else begin
      rbin     <= rbin_n;
      rgray    <= rgray_n;
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      empty    <= (rgray_n == wgray_r2);
      rlevel   <= wbin_r - rbin_n;
    end
  end

endmodule
