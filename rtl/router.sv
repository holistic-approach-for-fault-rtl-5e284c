// router: five-port mesh router with LBDR routing, NoCDepend reachability
// filtering and concurrent online checkers.
//
// Ports 0..4 are N, E, W, S and local (the PE). Each input has an
// input_buffer FIFO. The head flit of each FIFO is routed by its own lbdr
// unit; the resulting output mask is passed through the router's
// nocdepend_filter. Of the remaining outputs the lowest-numbered one is
// requested (with XY routing there is only one). If none remain, the packet
// is dropped: it is popped from the FIFO and a drop pulse is reported. One
// rr_arbiter per output picks among the requesting inputs; the crossbar
// forwards the granted flit, and the FIFO is popped when the downstream
// side accepts it (out_ready). A flit spends one cycle in the FIFO: it is
// written at edge t and can leave at edge t+1 if its output is free.
//
// Checkers: the odd-parity bit of every flit accepted at an input is
// checked (data-path checker); the FIFO, LBDR and arbiter checkers cover
// the control part. All results are registered in report (one bit per port
// and checker), one cycle after the event (two cycles for the FIFO, LBDR
// and arbiter checkers, whose own err outputs are registered).
//
// Configuration: the LBDR connectivity and routing bits reset to XY routing
// with the mesh edges disconnected, and can be rewritten with cfg_lbdr_we
// (the bits are computed offline). NoCDepend rectangles are written through
// cfg_nd_*. fi carries stuck-at fault injection for tests.
//
// Single-flit packets, valid/ready links, FIFO depth, output selection and
// the choice to forward a flit with a parity error (detection only) are
// this design's choices; LBDR, NoCDepend and the checker coverage follow
// the design description.
module router
  import ftnoc_pkg::*;
#(
  parameter int unsigned X          = 0,
  parameter int unsigned Y          = 0,
  parameter int unsigned COLS       = 2,
  parameter int unsigned ROWS       = 2,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned NREG       = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic  [NPORTS-1:0]         in_valid,
  output logic  [NPORTS-1:0]         in_ready,
  input  flit_t [NPORTS-1:0]         in_flit,
  output logic  [NPORTS-1:0]         out_valid,
  input  logic  [NPORTS-1:0]         out_ready,
  output flit_t [NPORTS-1:0]         out_flit,
  input  logic                       cfg_lbdr_we,
  input  logic  [3:0]                cfg_conn,
  input  logic  [7:0]                cfg_rbits,
  input  logic                       cfg_nd_we,
  input  logic  [1:0]                cfg_nd_port,
  input  logic  [$clog2(NREG > 1 ? NREG : 2)-1:0] cfg_nd_idx,
  input  logic  [4*COORD_W:0]        cfg_nd_rect,
  input  router_fi_t                 fi,
  output chk_report_t                report,
  output logic  [NPORTS-1:0]         drop
);
  localparam coord_t CX = COORD_W'(X);
  localparam coord_t CY = COORD_W'(Y);
  localparam logic [3:0] CONN_RST = {Y > 0, X > 0, X < COLS - 1, Y < ROWS - 1};

  logic [3:0] conn;
  logic [7:0] rbits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conn  <= CONN_RST;
      rbits <= RBITS_XY;
    end else if (cfg_lbdr_we) begin
      conn  <= cfg_conn;
      rbits <= cfg_rbits;
    end
  end

  // ---------------- inputs ----------------
  logic  [NPORTS-1:0]         hv, pop;
  flit_t [NPORTS-1:0]         head;
  logic  [NPORTS-1:0]         buf_err, rc_err, arb_err, par_err_c;
  logic  [NPORTS-1:0][4:0]    rc_mask, nd_mask;
  coord_t [NPORTS-1:0]        hdx, hdy;
  logic  [NPORTS-1:0]         nd_drop;

  for (genvar p = 0; p < NPORTS; p++) begin : g_in
    input_buffer #(.DEPTH(FIFO_DEPTH)) u_buf (
      .clk, .rst_n,
      .wr_valid (in_valid[p]), .wr_ready(in_ready[p]), .wr_data(in_flit[p]),
      .rd_valid (hv[p]), .rd_ready(pop[p]), .rd_data(head[p]),
      .fi_sa0   (fi.buf_sa0[p]), .fi_sa1(fi.buf_sa1[p]),
      .err      (buf_err[p])
    );

    assign hdx[p] = head[p].dst_x;
    assign hdy[p] = head[p].dst_y;

    lbdr u_lbdr (
      .clk, .rst_n,
      .valid (hv[p]),
      .cur_x (CX), .cur_y(CY),
      .dst_x (hdx[p]), .dst_y(hdy[p]),
      .conn, .rbits,
      .out_ports (rc_mask[p]),
      .fi_sa0 (fi.rc_sa0[p]), .fi_sa1(fi.rc_sa1[p]),
      .err    (rc_err[p])
    );

    assign par_err_c[p] = in_valid[p] && in_ready[p] && !parity_ok(in_flit[p]);
  end

  nocdepend_filter #(.NREG(NREG), .NQ(NPORTS)) u_nd (
    .clk, .rst_n,
    .cfg_we (cfg_nd_we), .cfg_port(cfg_nd_port), .cfg_idx(cfg_nd_idx), .cfg_rect(cfg_nd_rect),
    .valid (hv), .dst_x(hdx), .dst_y(hdy),
    .in_ports (rc_mask), .out_ports(nd_mask), .drop(nd_drop)
  );

  // Output selection: lowest-numbered remaining output.
  logic [NPORTS-1:0][NPORTS-1:0] sel;     // sel[p][o]
  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      sel[p] = '0;
      for (int o = NPORTS - 1; o >= 0; o--)
        if (nd_mask[p][o]) begin
          sel[p]    = '0;
          sel[p][o] = 1'b1;
        end
    end
  end

  // ---------------- outputs ----------------
  logic [NPORTS-1:0][NPORTS-1:0] req, gnt;  // [o][p]

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    for (genvar p = 0; p < NPORTS; p++) begin : g_req
      assign req[o][p] = hv[p] && sel[p][o] && !nd_drop[p];
    end

    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n,
      .req (req[o]), .advance(out_ready[o]), .gnt(gnt[o]),
      .fi_sa0 (fi.arb_sa0[o]), .fi_sa1(fi.arb_sa1[o]),
      .err (arb_err[o])
    );

    always_comb begin
      out_flit[o] = '0;
      for (int p = 0; p < NPORTS; p++)
        if (gnt[o][p]) out_flit[o] = out_flit[o] | head[p];
    end
    assign out_valid[o] = |gnt[o];
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      pop[p] = nd_drop[p];
      for (int o = 0; o < NPORTS; o++)
        if (gnt[o][p] && out_ready[o]) pop[p] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      report <= '0;
      drop   <= '0;
    end else begin
      report.parity_err <= par_err_c;
      report.buf_err    <= buf_err;
      report.rc_err     <= rc_err;
      report.arb_err    <= arb_err;
      drop              <= nd_drop;
    end
  end

endmodule
