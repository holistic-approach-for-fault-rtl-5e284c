// noc_mesh: COLS x ROWS 2D mesh of routers, one per tile.
//
// Router (x,y) has tile id y*COLS + x. Its N output drives the S input of
// router (x,y+1), its E output the W input of router (x+1,y), and so on; a
// link is one flit wide with a valid/ready pair. At the mesh edge the
// unused inputs are tied idle and the unused outputs are never ready (LBDR
// never routes there because the reset connectivity bits are cleared).
// The local ports are the PE interfaces.
//
// Directed link i*4+d is the output d (N,E,W,S) of router i. link_sa1[l]
// forces payload bit 0 of that link to 1, a stuck-at-1 fault on one wire
// used to exercise the parity checker (tie to zero in normal use).
//
// Configuration writes are addressed per router with one-hot write
// enables; all routers share the data lines.
module noc_mesh
  import ftnoc_pkg::*;
#(
  parameter int unsigned COLS       = 2,
  parameter int unsigned ROWS       = 2,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned NREG       = 2,
  localparam int unsigned NT        = COLS * ROWS,
  localparam int unsigned NDW       = $clog2(NREG > 1 ? NREG : 2)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic  [NT-1:0]       pe_in_valid,
  output logic  [NT-1:0]       pe_in_ready,
  input  flit_t [NT-1:0]       pe_in_flit,
  output logic  [NT-1:0]       pe_out_valid,
  input  logic  [NT-1:0]       pe_out_ready,
  output flit_t [NT-1:0]       pe_out_flit,
  input  logic  [NT-1:0]       cfg_lbdr_we,
  input  logic  [3:0]          cfg_conn,
  input  logic  [7:0]          cfg_rbits,
  input  logic  [NT-1:0]       cfg_nd_we,
  input  logic  [1:0]          cfg_nd_port,
  input  logic  [NDW-1:0]      cfg_nd_idx,
  input  logic  [4*COORD_W:0]  cfg_nd_rect,
  input  router_fi_t [NT-1:0]  fi,
  input  logic  [4*NT-1:0]     link_sa1,
  output chk_report_t [NT-1:0] report,
  output logic  [NT-1:0][NPORTS-1:0] drop
);
  logic  [NT-1:0][NPORTS-1:0] iv, ir, ov, orr;
  flit_t [NT-1:0][NPORTS-1:0] ifl, ofl;

  function automatic flit_t link_fault(input flit_t f, input logic sa1);
    flit_t r;
    r = f;
    if (sa1) r.payload[0] = 1'b1;
    return r;
  endfunction

  for (genvar y = 0; y < ROWS; y++) begin : g_y
    for (genvar x = 0; x < COLS; x++) begin : g_x
      localparam int unsigned I = y * COLS + x;

      router #(.X(x), .Y(y), .COLS(COLS), .ROWS(ROWS),
               .FIFO_DEPTH(FIFO_DEPTH), .NREG(NREG)) u_router (
        .clk, .rst_n,
        .in_valid (iv[I]), .in_ready(ir[I]), .in_flit(ifl[I]),
        .out_valid(ov[I]), .out_ready(orr[I]), .out_flit(ofl[I]),
        .cfg_lbdr_we (cfg_lbdr_we[I]), .cfg_conn, .cfg_rbits,
        .cfg_nd_we (cfg_nd_we[I]), .cfg_nd_port, .cfg_nd_idx, .cfg_nd_rect,
        .fi (fi[I]), .report(report[I]), .drop(drop[I])
      );

      // local port
      assign iv[I][P_L]    = pe_in_valid[I];
      assign ifl[I][P_L]   = pe_in_flit[I];
      assign pe_in_ready[I] = ir[I][P_L];
      assign pe_out_valid[I] = ov[I][P_L];
      assign pe_out_flit[I]  = ofl[I][P_L];
      assign orr[I][P_L]     = pe_out_ready[I];

      // north input comes from the S output of (x, y+1)
      if (y < ROWS - 1) begin : g_n
        localparam int unsigned J = (y + 1) * COLS + x;
        assign iv[I][P_N]  = ov[J][P_S];
        assign ifl[I][P_N] = link_fault(ofl[J][P_S], link_sa1[J*4 + P_S]);
        assign orr[J][P_S] = ir[I][P_N];
      end else begin : g_n_edge
        assign iv[I][P_N]  = 1'b0;
        assign ifl[I][P_N] = '0;
        assign orr[I][P_N] = 1'b0;
      end
      // south input comes from the N output of (x, y-1)
      if (y > 0) begin : g_s
        localparam int unsigned J = (y - 1) * COLS + x;
        assign iv[I][P_S]  = ov[J][P_N];
        assign ifl[I][P_S] = link_fault(ofl[J][P_N], link_sa1[J*4 + P_N]);
        assign orr[J][P_N] = ir[I][P_S];
      end else begin : g_s_edge
        assign iv[I][P_S]  = 1'b0;
        assign ifl[I][P_S] = '0;
        assign orr[I][P_S] = 1'b0;
      end
      // east input comes from the W output of (x+1, y)
      if (x < COLS - 1) begin : g_e
        localparam int unsigned J = y * COLS + x + 1;
        assign iv[I][P_E]  = ov[J][P_W];
        assign ifl[I][P_E] = link_fault(ofl[J][P_W], link_sa1[J*4 + P_W]);
        assign orr[J][P_W] = ir[I][P_E];
      end else begin : g_e_edge
        assign iv[I][P_E]  = 1'b0;
        assign ifl[I][P_E] = '0;
        assign orr[I][P_E] = 1'b0;
      end
      // west input comes from the E output of (x-1, y)
      if (x > 0) begin : g_w
        localparam int unsigned J = y * COLS + x - 1;
        assign iv[I][P_W]  = ov[J][P_E];
        assign ifl[I][P_W] = link_fault(ofl[J][P_E], link_sa1[J*4 + P_E]);
        assign orr[J][P_E] = ir[I][P_W];
      end else begin : g_w_edge
        assign iv[I][P_W]  = 1'b0;
        assign ifl[I][P_W] = '0;
        assign orr[I][P_W] = 1'b0;
      end
    end
  end

endmodule
