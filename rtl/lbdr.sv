// lbdr: Logic-Based Distributed Routing computation with an online checker.
//
// From the destination and the router's own coordinates it forms the
// direction flags N', E', W', S' (destination lies north, east, west,
// south) and combines them with the eight routing bits R (allowed turns)
// and the four connectivity bits C (output to N, E, W, S exists and is
// healthy):
//   N = (N'~E'~W' | N'E'Rne | N'W'Rnw) & Cn     E = (E'~N'~S' | E'N'Ren | E'S'Res) & Ce
//   W = (W'~N'~S' | W'N'Rwn | W'S'Rws) & Cw     S = (S'~E'~W' | S'E'Rse | S'W'Rsw) & Cs
//   L = ~N'~E'~W'~S'
// out_ports is a 5-bit mask (N,E,W,S,L); more than one bit can be set for
// an adaptive routing algorithm. Purely combinational.
//
// The 4 + 8 configuration bits are those the design specifies for LBDR;
// the equations are the standard LBDR ones. The checker is this design's
// own: it flags (registered, one cycle later, only while valid is high) an
// output that leads away from the destination, a local output for a remote
// destination or no local output for the own address, and an output to a
// disconnected port, or a missing output towards a destination that lies
// straight ahead on a connected port. fi_sa0 / fi_sa1 inject stuck-at faults on out_ports.
module lbdr
  import ftnoc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid,
  input  coord_t      cur_x,
  input  coord_t      cur_y,
  input  coord_t      dst_x,
  input  coord_t      dst_y,
  input  logic [3:0]  conn,      // Cn, Ce, Cw, Cs in bits 0..3
  input  logic [7:0]  rbits,     // Rne,Rnw,Ren,Res,Rwn,Rws,Rse,Rsw in bits 0..7
  output logic [4:0]  out_ports,
  input  logic [4:0]  fi_sa0,
  input  logic [4:0]  fi_sa1,
  output logic        err
);
  logic np, ep, wp, sp;
  logic [4:0] raw;

  assign np = dst_y > cur_y;
  assign sp = dst_y < cur_y;
  assign ep = dst_x > cur_x;
  assign wp = dst_x < cur_x;

  always_comb begin
    raw[P_N] = ((np & ~ep & ~wp) | (np & ep & rbits[T_NE]) | (np & wp & rbits[T_NW])) & conn[0];
    raw[P_E] = ((ep & ~np & ~sp) | (ep & np & rbits[T_EN]) | (ep & sp & rbits[T_ES])) & conn[1];
    raw[P_W] = ((wp & ~np & ~sp) | (wp & np & rbits[T_WN]) | (wp & sp & rbits[T_WS])) & conn[2];
    raw[P_S] = ((sp & ~ep & ~wp) | (sp & ep & rbits[T_SE]) | (sp & wp & rbits[T_SW])) & conn[3];
    raw[P_L] = ~np & ~ep & ~wp & ~sp;
  end

  assign out_ports = (raw & ~fi_sa0) | fi_sa1;

  // ---------------- checker ----------------
  logic chk_fail, here;
  assign here = (dst_x == cur_x) && (dst_y == cur_y);
  always_comb begin
    chk_fail = 1'b0;
    if (out_ports[P_N] && !(dst_y > cur_y)) chk_fail = 1'b1;
    if (out_ports[P_S] && !(dst_y < cur_y)) chk_fail = 1'b1;
    if (out_ports[P_E] && !(dst_x > cur_x)) chk_fail = 1'b1;
    if (out_ports[P_W] && !(dst_x < cur_x)) chk_fail = 1'b1;
    if (out_ports[P_L] != here)             chk_fail = 1'b1;
    if ((out_ports[3:0] & ~conn) != '0)     chk_fail = 1'b1;
    if (here && (out_ports[3:0] != '0))     chk_fail = 1'b1;
    // a destination straight ahead on a connected output must take it
    if ((dst_x == cur_x) && (dst_y > cur_y) && conn[0] && !out_ports[P_N]) chk_fail = 1'b1;
    if ((dst_y == cur_y) && (dst_x > cur_x) && conn[1] && !out_ports[P_E]) chk_fail = 1'b1;
    if ((dst_y == cur_y) && (dst_x < cur_x) && conn[2] && !out_ports[P_W]) chk_fail = 1'b1;
    if ((dst_x == cur_x) && (dst_y < cur_y) && conn[3] && !out_ports[P_S]) chk_fail = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err <= 1'b0;
    else        err <= valid && chk_fail;
  end

endmodule
