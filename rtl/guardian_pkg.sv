// guardian_pkg -- types and constants shared by the guardian datapath.
//
// The guardian listens to an IEEE 802.15.4 (2.4 GHz O-QPSK) channel, parses each
// frame while it is still on the air, checks it against a compile-time rule table
// and, on a DROP verdict, transmits a short interference burst so that the frame
// fails its CRC at every victim receiver.
//
// This package holds:
//   * the 16 DSSS chip sequences of the 2.4 GHz PHY (standard values, generated from
//     the symbol-0 sequence by 4-chip cyclic shifts and odd-chip inversion),
//   * the half-sine pulse table used by the modulator,
//   * the parsed-header struct produced by the framer,
//   * the rule/match types of the FPGA rule checker and the default rule policy.
// The rule policy mirrors the gtables examples of the paper (rule chains whose
// rules hold one or more matches, target DROP); its encoding as a table of typed
// match slots is this design's own. Table size (30 rules x 5 match slots) is the
// largest rule chain and match count of the paper's rule-checker delay measurement;
// the paper gives no separate size for its FPGA table.
package guardian_pkg;

  // ---------------------------------------------------------------- PHY constants
  localparam int CHIPS_PER_SYM = 32;
  localparam int MAX_PSDU      = 127;      // aMaxPHYPacketSize
  localparam logic [7:0] SFD_BYTE = 8'hA7; // start-of-frame delimiter
  localparam int SAMPLE_W      = 16;       // baseband I/Q sample width

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // chip c_k of symbol 0 is bit k (c0 is sent first)
  localparam logic [31:0] SYM0_CHIPS = 32'b0111_0100_0100_1010_1100_0011_1001_1011;

  // chip sequence of a data symbol: symbols 1..7 are symbol 0 cyclically delayed
  // by 4*s chips, symbols 8..15 are symbols 0..7 with every odd chip inverted
  function automatic logic [31:0] chip_seq(input logic [3:0] sym);
    logic [31:0] seq;
    int unsigned sh;
    sh = 4 * int'(sym[2:0]);
    for (int k = 0; k < 32; k++) begin
      seq[k] = SYM0_CHIPS[(k - int'(sh) + 32) % 32];
      if (sym[3] && (k % 2 == 1)) seq[k] = ~seq[k];
    end
    return seq;
  endfunction

  // half-sine pulse value, scaled to 2^14, at sample j of a pulse that is
  // 2*spc samples long: round(16384 * sin(pi * j / (2*spc))). spc in {1,2,4}.
  function automatic logic [14:0] half_sine(input int unsigned j, input int unsigned spc);
    logic [14:0] v;
    v = '0;
    case (spc)
      1: v = (j == 1) ? 15'd16384 : 15'd0;
      2: case (j) 1: v = 15'd11585; 2: v = 15'd16384; 3: v = 15'd11585; default: v = 15'd0; endcase
      4: case (j)
           1: v = 15'd6270;  2: v = 15'd11585; 3: v = 15'd15137; 4: v = 15'd16384;
           5: v = 15'd15137; 6: v = 15'd11585; 7: v = 15'd6270;  default: v = 15'd0;
         endcase
      default: v = '0;
    endcase
    return v;
  endfunction

  // ---------------------------------------------------------------- MAC header
  typedef enum logic [2:0] {
    FT_BEACON = 3'd0, FT_DATA = 3'd1, FT_ACK = 3'd2, FT_CMD = 3'd3
  } frame_type_e;

  typedef enum logic [1:0] {
    AM_NONE = 2'd0, AM_RSVD = 2'd1, AM_SHORT = 2'd2, AM_EXT = 2'd3
  } addr_mode_e;

  typedef struct packed {
    logic [2:0]  frame_type;
    logic        sec_en;
    logic        pan_comp;
    addr_mode_e  dst_mode;
    addr_mode_e  src_mode;
    logic [7:0]  seq;
    logic [15:0] dst_pan;
    logic [63:0] dst_addr;
    logic [15:0] src_pan;    // effective source PAN (= dst_pan when compressed)
    logic [63:0] src_addr;
    logic [6:0]  hdr_len;    // MAC header length in bytes
    logic [6:0]  psdu_len;   // frame length from the PHY header
  } frame_info_t;

  // ---------------------------------------------------------------- rule table
  typedef enum logic [3:0] {
    M_NONE     = 4'd0,  // unused slot, always true
    M_FTYPE    = 4'd1,  // frame type (value[2:0])
    M_DST_PAN  = 4'd2,
    M_DST_ADDR = 4'd3,  // nbytes 2: short address, 8: extended address
    M_SRC_PAN  = 4'd4,
    M_SRC_ADDR = 4'd5,
    M_PSDU     = 4'd6,  // nbytes (1..8) little-endian bytes at PSDU offset
    M_PAYLOAD  = 4'd7,  // same, offset counted from the start of the MAC payload
    M_RSS      = 4'd8   // received signal strength above value[7:0] (signed dBm)
  } match_kind_e;

  typedef struct packed {
    match_kind_e kind;
    logic [6:0]  offset;
    logic [3:0]  nbytes;
    logic [63:0] mask;
    logic [63:0] value;
  } match_t;

  localparam int NUM_RULES        = 30;
  localparam int MATCHES_PER_RULE = 5;

  typedef struct packed {
    logic                             enable;
    match_t [MATCHES_PER_RULE-1:0]    m;
  } rule_t;

  typedef rule_t [NUM_RULES-1:0] policy_t;

  localparam logic [63:0] MASK16 = 64'h0000_0000_0000_FFFF;
  localparam logic [63:0] MASK8  = 64'h0000_0000_0000_00FF;
  localparam logic [63:0] MASKALL = '1;
  localparam logic [6:0]  ASL_CMD_OFFSET = 7'd10;

  function automatic match_t mk(input match_kind_e k, input logic [63:0] value,
                                input logic [63:0] mask = MASK16,
                                input logic [3:0] nbytes = 4'd2,
                                input logic [6:0] offset = 7'd0);
    match_t r;
    r.kind = k; r.value = value; r.mask = mask; r.nbytes = nbytes; r.offset = offset;
    return r;
  endfunction

  localparam match_t NOMATCH = '{kind: M_NONE, offset: 7'd0, nbytes: 4'd0, mask: 64'd0, value: 64'd0};

  // Default policy: the example rules of the paper, one chain, all -j DROP.
  //  0: -m dst --pan 0x22 --addr 0xFFFF -m type --ctrl   (control frames to broadcast)
  //  1: -m dst --addr 0xFFFF --pan 0x22                  (all broadcast in PAN 0x22)
  //  2: -m dst --pan 0xACAC -m nw_ctrl 0x0008 -m asl_cmd 0x01  (OTA update traffic)
  //  3: -m type --control -m dst --pan 0xACAC -m RSS --above -80  (outside associations)
  //  4..6: -m src --addr 0x1111/0x1112/0x1115 --pan 0xACAC  (revoked motes)
  //  7..29: empty
  // A gtables match that names two fields uses two slots here.
  function automatic policy_t default_policy();
    policy_t p;
    for (int r = 0; r < NUM_RULES; r++) begin
      p[r].enable = 1'b0;
      for (int m = 0; m < MATCHES_PER_RULE; m++) p[r].m[m] = NOMATCH;
    end
    p[0].enable = 1'b1;
    p[0].m[0] = mk(M_DST_PAN,  64'h0022);
    p[0].m[1] = mk(M_DST_ADDR, 64'hFFFF);
    p[0].m[2] = mk(M_FTYPE,    64'(FT_CMD), 64'h7, 4'd1);
    p[1].enable = 1'b1;
    p[1].m[0] = mk(M_DST_ADDR, 64'hFFFF);
    p[1].m[1] = mk(M_DST_PAN,  64'h0022);
    p[2].enable = 1'b1;
    p[2].m[0] = mk(M_DST_PAN,  64'hACAC);
    p[2].m[1] = mk(M_PAYLOAD,  64'h0008, MASK16, 4'd2, 7'd0);
    p[2].m[2] = mk(M_PAYLOAD,  64'h01,   MASK8,  4'd1, ASL_CMD_OFFSET);
    p[3].enable = 1'b1;
    p[3].m[0] = mk(M_FTYPE,    64'(FT_CMD), 64'h7, 4'd1);
    p[3].m[1] = mk(M_DST_PAN,  64'hACAC);
    p[3].m[2] = mk(M_RSS,      64'(8'(-80)), MASK8, 4'd1);
    p[4].enable = 1'b1;
    p[4].m[0] = mk(M_SRC_ADDR, 64'h1111);
    p[4].m[1] = mk(M_SRC_PAN,  64'hACAC);
    p[5].enable = 1'b1;
    p[5].m[0] = mk(M_SRC_ADDR, 64'h1112);
    p[5].m[1] = mk(M_SRC_PAN,  64'hACAC);
    p[6].enable = 1'b1;
    p[6].m[0] = mk(M_SRC_ADDR, 64'h1115);
    p[6].m[1] = mk(M_SRC_PAN,  64'hACAC);
    return p;
  endfunction

  localparam policy_t DEFAULT_POLICY = default_policy();

  // ---------------------------------------------------------------- interference
  typedef enum logic [1:0] {
    WAVE_CW = 2'd0, WAVE_NOISE = 2'd1, WAVE_OQPSK = 2'd2
  } wave_mode_e;

endpackage
