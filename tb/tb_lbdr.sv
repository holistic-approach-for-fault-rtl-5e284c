// Testbench of lbdr: every current/destination pair of a 4x4 area with
// XY routing bits (expected route: X first, then Y, local at the
// destination, masked by connectivity), random routing bits against a
// table-driven reference, and stuck-at faults on the outputs that the
// checker must flag.
`include "tb_check.svh"
module tb_lbdr;
  import ftnoc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid, err;
  coord_t cur_x, cur_y, dst_x, dst_y;
  logic [3:0] conn;
  logic [7:0] rbits;
  logic [4:0] out_ports, fi_sa0, fi_sa1, exp;
  int checks = 0, failures = 0;
  int errs;

  lbdr dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: for each output, the quadrant it serves and the turn bit
  // that permits it when the destination is off-axis.
  function automatic logic [4:0] ref_route(input int cx, cy, dx, dy,
                                           input logic [3:0] c, input logic [7:0] r);
    logic [4:0] o;
    bit n, s, e, w;
    n = dy > cy; s = dy < cy; e = dx > cx; w = dx < cx;
    o = '0;
    if (!n && !s && !e && !w) o[P_L] = 1;
    if (n) o[P_N] = (!e && !w) ? 1 : (e ? r[T_NE] : r[T_NW]);
    if (s) o[P_S] = (!e && !w) ? 1 : (e ? r[T_SE] : r[T_SW]);
    if (e) o[P_E] = (!n && !s) ? 1 : (n ? r[T_EN] : r[T_ES]);
    if (w) o[P_W] = (!n && !s) ? 1 : (n ? r[T_WN] : r[T_WS]);
    o[3:0] &= c;
    return o;
  endfunction

  initial begin
    valid = 1; fi_sa0 = '0; fi_sa1 = '0; conn = 4'hF; rbits = RBITS_XY;
    cur_x = 0; cur_y = 0; dst_x = 0; dst_y = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    errs = 0;
    for (int cx = 0; cx < 4; cx++) for (int cy = 0; cy < 4; cy++)
      for (int dx = 0; dx < 4; dx++) for (int dy = 0; dy < 4; dy++) begin
        cur_x = cx; cur_y = cy; dst_x = dx; dst_y = dy;
        conn = {cy > 0, cx > 0, cx < 3, cy < 3};
        rbits = RBITS_XY;
        #1;
        if (dx > cx)      exp = 5'b00010;
        else if (dx < cx) exp = 5'b00100;
        else if (dy > cy) exp = 5'b00001;
        else if (dy < cy) exp = 5'b01000;
        else              exp = 5'b10000;
        `CHECK(out_ports == exp, $sformatf("XY (%0d,%0d)->(%0d,%0d): %b exp %b", cx, cy, dx, dy, out_ports, exp))
        @(negedge clk);
        if (err) errs++;
      end
    `CHECK(errs == 0, "no checker alarm under XY routing")

    for (int i = 0; i < 2000; i++) begin
      cur_x = coord_t'($urandom % 8); cur_y = coord_t'($urandom % 8);
      dst_x = coord_t'($urandom % 8); dst_y = coord_t'($urandom % 8);
      conn = 4'($urandom); rbits = 8'($urandom);
      #1;
      exp = ref_route(cur_x, cur_y, dst_x, dst_y, conn, rbits);
      `CHECK(out_ports == exp, "random routing bits")
      @(negedge clk);
    end

    // Stuck-at faults on each output line.
    conn = 4'hF; rbits = RBITS_XY;
    for (int b = 0; b < 5; b++) begin
      for (int pol = 0; pol < 2; pol++) begin
        // choose a destination for which line b is 1 (SA0) or 0 (SA1)
        cur_x = 2; cur_y = 2;
        case (b)
          P_N: begin dst_x = 2; dst_y = 3; end
          P_E: begin dst_x = 3; dst_y = 2; end
          P_W: begin dst_x = 1; dst_y = 2; end
          P_S: begin dst_x = 2; dst_y = 1; end
          default: begin dst_x = 2; dst_y = 2; end
        endcase
        if (pol == 1) begin dst_x = 2; dst_y = 2; if (b == P_L) dst_x = 3; end
        errs = 0;
        if (pol == 0) fi_sa0[b] = 1; else fi_sa1[b] = 1;
        repeat (3) begin @(negedge clk); if (err) errs++; end
        fi_sa0 = '0; fi_sa1 = '0;
        @(negedge clk); @(negedge clk);
        `CHECK(errs > 0, $sformatf("checker flags stuck-at-%0d on output %0d", pol, b))
      end
    end
    // no alarm while valid is low
    valid = 0; fi_sa1 = 5'b11111; errs = 0;
    repeat (3) begin @(negedge clk); if (err) errs++; end
    fi_sa1 = '0;
    `CHECK(errs == 0, "no report while no packet is routed")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
