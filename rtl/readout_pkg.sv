// readout_pkg: types, constants and helper functions shared by the read-out
// board user logic.
//
// XGMII control characters follow IEEE 802.3 clause 46 (idle 0x07, start
// 0xFB, terminate 0xFD). Frame words in the daisy-chain path are 72 bits,
// {TXC[7:0], TXD[63:0]}, the width the arbitration figure prints for its
// FIFOs. Lane i of an XGMII word is TXD[8*i+7:8*i] with control bit TXC[i].
//
// The user stream word is the XTOE/UOE user FIFO interface (TOE_TX_DATA[63:0],
// TOE_TX_VALID_BYTES[7:0], SOP, EOP). Byte order on that bus is this design's
// choice: the first byte of the payload is DATA[63:56], and VALID_BYTES[i]
// marks lane i (DATA[8*i+7:8*i]) valid, so a partial last word is valid from
// the top lane down.
//
// The register-access protocol is RBCP (the remote bus control protocol of
// the SiTCP hardware TCP processor the paper cites): an 8-byte header
// {Ver/Type=0xFF, CMD/Flag, ID, Length, Address[31:0]} followed, for a
// write, by Length data bytes. CMD/Flag is 0x80 for a write, 0xC0 for a read;
// the reply sets the ACK bit 0x08 and, on an error, the bus-error bit 0x01.
package readout_pkg;

  // ---------------- XGMII ----------------
  localparam logic [7:0] XGMII_IDLE  = 8'h07;
  localparam logic [7:0] XGMII_START = 8'hFB;
  localparam logic [7:0] XGMII_TERM  = 8'hFD;

  typedef struct packed {
    logic [7:0]  c;   // TXC
    logic [63:0] d;   // TXD
  } xgmii_word_t;     // 72 bits

  localparam xgmii_word_t XGMII_IDLE_WORD = '{c: 8'hFF, d: {8{XGMII_IDLE}}};

  // A frame starts with a start character in lane 0.
  function automatic logic xgmii_is_start(xgmii_word_t w);
    return w.c[0] && (w.d[7:0] == XGMII_START);
  endfunction

  // True when some lane of the word carries the terminate character.
  function automatic logic xgmii_has_term(xgmii_word_t w);
    logic t;
    t = 1'b0;
    for (int i = 0; i < 8; i++)
      if (w.c[i] && (w.d[8*i +: 8] == XGMII_TERM)) t = 1'b1;
    return t;
  endfunction

  // Lane of the terminate character (0..7); 0 when there is none.
  function automatic logic [2:0] xgmii_term_lane(xgmii_word_t w);
    logic [2:0] l;
    l = 3'd0;
    for (int i = 7; i >= 0; i--)
      if (w.c[i] && (w.d[8*i +: 8] == XGMII_TERM)) l = 3'(i);
    return l;
  endfunction

  // ---------------- XTOE/UOE user stream ----------------
  typedef struct packed {
    logic        sop;
    logic        eop;
    logic [7:0]  valid_bytes;
    logic [63:0] data;
  } ustream_t;        // 74 bits

  function automatic logic [3:0] count_bytes(logic [7:0] vb);
    logic [3:0] n;
    n = 4'd0;
    for (int i = 0; i < 8; i++) n = n + 4'(vb[i]);
    return n;
  endfunction

  // ---------------- RBCP ----------------
  localparam logic [7:0] RBCP_VER_TYPE   = 8'hFF;
  localparam logic [7:0] RBCP_CMD_WR     = 8'h80;
  localparam logic [7:0] RBCP_CMD_RD     = 8'hC0;
  localparam logic [7:0] RBCP_FLAG_ACK   = 8'h08;
  localparam logic [7:0] RBCP_FLAG_BUSER = 8'h01;

  typedef struct packed {
    logic [7:0]  ver_type;
    logic [7:0]  cmd_flag;
    logic [7:0]  id;
    logic [7:0]  len;
    logic [31:0] addr;
  } rbcp_hdr_t;       // 64 bits: one user-stream word

  typedef struct packed {
    logic        is_read;
    logic [7:0]  id;
    logic [7:0]  len;
    logic [31:0] addr;
  } rbcp_cmd_t;

  // Reply descriptor handed from the bus controller to the reply builders.
  typedef struct packed {
    logic        is_read;
    logic        bus_err;
    logic [7:0]  id;
    logic [7:0]  len;
    logic [31:0] addr;
  } rbcp_reply_t;

  function automatic logic [63:0] rbcp_reply_header(rbcp_reply_t r);
    rbcp_hdr_t h;
    h.ver_type = RBCP_VER_TYPE;
    h.cmd_flag = (r.is_read ? RBCP_CMD_RD : RBCP_CMD_WR) | RBCP_FLAG_ACK |
                 (r.bus_err ? RBCP_FLAG_BUSER : 8'h00);
    h.id       = r.id;
    h.len      = r.len;
    h.addr     = r.addr;
    return h;
  endfunction

  // ---------------- register map (32-bit registers, byte addressed) -------
  localparam int NREGS          = 8;   // "REGX8"
  localparam int REG_CTRL       = 0;   // [0] generator enable, [1] source: 1 generator, 0 DDR3 cache
  localparam int REG_GEN_RATE   = 1;   // [16:0] generator rate, words per cycle = value/65536
  localparam int REG_BPIX_GDAC  = 2;   // to BPIX GDAC load
  localparam int REG_BPIX_CHAIN = 3;   // to BPIX chain load
  localparam int REG_BPIX_ARRAY = 4;   // to BPIX array write
  localparam int REG_TRIG       = 5;   // trigger setting, to fast control
  localparam int REG_THROUGHPUT = 6;   // read only: payload bytes in the last 100 us window
  localparam int REG_STATUS     = 7;   // read only: checker errors, frame drops
  localparam logic [NREGS-1:0] REG_RO_MASK = 8'b1100_0000;

  // Payload word w of every generated frame (the same payload repeats).
  function automatic logic [63:0] gen_payload(logic [31:0] w);
    return {w, ~w};
  endfunction

endpackage
