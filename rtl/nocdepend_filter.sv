// nocdepend_filter: NoCDepend reachability registers of one router.
//
// Each of the four router outputs (N, E, W, S) holds NREG rectangle
// registers, shared by NQ parallel queries (one per router input). A rectangle is given by two corners, (x0,y0) and (x1,y1), with
// x0 <= x1 and y0 <= y1, plus a valid bit; it lists a region of the mesh
// that cannot be reached through that output. A destination inside a valid
// rectangle of an output removes that output from the routing mask. If a
// valid packet is left with no output at all, drop is raised and the router
// discards the packet instead of injecting it further. The local output is
// never filtered.
//
// The rectangles are computed offline and loaded through cfg_we / cfg_port
// / cfg_idx / cfg_rect (this write port stands in for the iJTAG access the
// design uses). All registers reset to invalid. Filtering is combinational.
// Register count NREG is the user's choice in the design; 2 is this
// design's default.
module nocdepend_filter
  import ftnoc_pkg::*;
#(
  parameter int unsigned NREG = 2,
  parameter int unsigned NQ   = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [1:0]  cfg_port,
  input  logic [$clog2(NREG > 1 ? NREG : 2)-1:0] cfg_idx,
  input  logic [4*COORD_W:0] cfg_rect,   // {valid, x0, y0, x1, y1}
  input  logic [NQ-1:0]          valid,
  input  coord_t [NQ-1:0]        dst_x,
  input  coord_t [NQ-1:0]        dst_y,
  input  logic [NQ-1:0][4:0]     in_ports,
  output logic [NQ-1:0][4:0]     out_ports,
  output logic [NQ-1:0]          drop
);
  typedef struct packed {
    logic   v;
    coord_t x0, y0, x1, y1;
  } rect_t;

  rect_t regs [4][NREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 4; p++)
        for (int r = 0; r < NREG; r++) regs[p][r] <= '0;
    end else if (cfg_we && (int'(cfg_idx) < NREG)) begin
      regs[cfg_port][cfg_idx] <= rect_t'(cfg_rect);
    end
  end

  logic [NQ-1:0][3:0] unreach;
  always_comb begin
    unreach = '0;
    for (int q = 0; q < NQ; q++) begin
      for (int p = 0; p < 4; p++)
        for (int r = 0; r < NREG; r++)
          if (regs[p][r].v &&
              dst_x[q] >= regs[p][r].x0 && dst_x[q] <= regs[p][r].x1 &&
              dst_y[q] >= regs[p][r].y0 && dst_y[q] <= regs[p][r].y1)
            unreach[q][p] = 1'b1;
      out_ports[q] = {in_ports[q][4], in_ports[q][3:0] & ~unreach[q]};
      drop[q]      = valid[q] && (out_ports[q] == '0);
    end
  end

endmodule
