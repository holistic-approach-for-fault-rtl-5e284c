// ftnoc_pkg: types and constants shared by the fault-tolerant many-core NoC.
//
// Port numbering follows the LBDR convention N, E, W, S, plus the local
// port L. Mesh coordinates grow to the east (x) and to the north (y); tile
// id = y*COLS + x, so in a 2x2 mesh tile 0 is south-west and tile 3 is
// north-east, as in the health-map example of the design documentation.
//
// A packet is a single flit (this design's choice; the source gives no
// packet format). Every flit carries one odd-parity bit over all other
// bits, which the receiving router checks (the data-path checker).
//
// The eight 90-degree turns are numbered in LBDR routing-bit order:
// 0 NE, 1 NW, 2 EN, 3 ES, 4 WN, 5 WS, 6 SE, 7 SW, where "NE" is a packet
// travelling north that turns east.
//
// System Health Map words are WORD_W = 17 bits. Tile word (address i):
// {aging[7:0], turn_broken[7:0], pe_broken}. Link word (address NT+i):
// bits [3:0] are the outgoing links N,E,W,S of router i. A set bit means
// Broken, so a cleared memory means all healthy.
package ftnoc_pkg;

  localparam int unsigned NPORTS  = 5;
  localparam int unsigned P_N = 0, P_E = 1, P_W = 2, P_S = 3, P_L = 4;

  localparam int unsigned COORD_W   = 4;   // up to a 16x16 mesh
  localparam int unsigned PAYLOAD_W = 16;

  typedef logic [COORD_W-1:0] coord_t;

  typedef struct packed {
    logic                 parity;   // odd parity over the remaining bits
    coord_t               dst_x;
    coord_t               dst_y;
    coord_t               src_x;
    coord_t               src_y;
    logic [PAYLOAD_W-1:0] payload;
  } flit_t;

  localparam int unsigned FLIT_W = $bits(flit_t);

  // Turn indices (LBDR routing bits Rne, Rnw, Ren, Res, Rwn, Rws, Rse, Rsw)
  localparam int unsigned T_NE = 0, T_NW = 1, T_EN = 2, T_ES = 3,
                          T_WN = 4, T_WS = 5, T_SE = 6, T_SW = 7;

  // Routing bits of XY routing: X first, so turns from X into Y are allowed.
  localparam logic [7:0] RBITS_XY = 8'b0011_1100;  // Ren, Res, Rwn, Rws

  // Checker reports of one router, one bit per port (N,E,W,S,L), registered.
  typedef struct packed {
    logic [NPORTS-1:0] parity_err;  // data path: odd-parity check at input
    logic [NPORTS-1:0] buf_err;     // input FIFO control checker
    logic [NPORTS-1:0] rc_err;      // LBDR routing-computation checker
    logic [NPORTS-1:0] arb_err;     // output arbiter checker
  } chk_report_t;

  // Stuck-at fault-injection controls of one router (test hooks; all zero
  // in normal operation). Index [p] is the input port p for buffers and
  // routing, and the output port p for arbiters.
  typedef struct packed {
    logic [NPORTS-1:0][3:0]        buf_sa0;
    logic [NPORTS-1:0][3:0]        buf_sa1;
    logic [NPORTS-1:0][NPORTS-1:0] rc_sa0;
    logic [NPORTS-1:0][NPORTS-1:0] rc_sa1;
    logic [NPORTS-1:0][NPORTS-1:0] arb_sa0;
    logic [NPORTS-1:0][NPORTS-1:0] arb_sa1;
  } router_fi_t;

  // System Health Map layout
  localparam int unsigned WORD_W  = 17;
  localparam int unsigned AGE_LSB = 9;
  localparam int unsigned TRN_LSB = 1;
  localparam int unsigned PE_BIT  = 0;

  typedef enum logic [0:0] {
    CMD_MAP_STORE  = 1'b0,
    CMD_MAP_DEPLOY = 1'b1
  } msu_cmd_e;

  localparam int unsigned TAG_W = 16;

  // Odd parity: the returned bit makes the total number of ones odd.
  function automatic logic odd_parity(input logic [FLIT_W-2:0] bits);
    return ~(^bits);
  endfunction

  function automatic flit_t add_parity(input flit_t f);
    flit_t r;
    r = f;
    r.parity = odd_parity(f[FLIT_W-2:0]);
    return r;
  endfunction

  function automatic logic parity_ok(input flit_t f);
    return ^f;  // odd number of ones overall
  endfunction

  // CRC-16/CCITT (poly 0x1021), one SHM word per step, MSB first.
  function automatic logic [TAG_W-1:0] crc16_word(input logic [TAG_W-1:0] crc,
                                                  input logic [WORD_W-1:0] w);
    logic [TAG_W-1:0] c;
    logic fb;
    c = crc;
    for (int i = WORD_W - 1; i >= 0; i--) begin
      fb = c[TAG_W-1] ^ w[i];
      c  = {c[TAG_W-2:0], 1'b0};
      if (fb) c = c ^ 16'h1021;
    end
    return c;
  endfunction

  localparam logic [TAG_W-1:0] CRC_INIT = 16'hFFFF;

endpackage
