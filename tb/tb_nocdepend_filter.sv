// Testbench of nocdepend_filter: loads random non-reachable rectangles
// into the registers of every output and checks random queries against a
// reference (output removed when the destination lies in one of its
// rectangles; drop when nothing is left for a valid packet).
`include "tb_check.svh"
module tb_nocdepend_filter;
  import ftnoc_pkg::*;
  localparam int NREG = 2, NQ = 5;
  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [1:0] cfg_port;
  logic [0:0] cfg_idx;
  logic [4*COORD_W:0] cfg_rect;
  logic [NQ-1:0] valid, drop;
  coord_t [NQ-1:0] dst_x, dst_y;
  logic [NQ-1:0][4:0] in_ports, out_ports;
  int checks = 0, failures = 0, drops = 0;
  int rx0[4][NREG], ry0[4][NREG], rx1[4][NREG], ry1[4][NREG];
  bit rv[4][NREG];

  nocdepend_filter #(.NREG(NREG), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_random();
    for (int p = 0; p < 4; p++)
      for (int r = 0; r < NREG; r++) begin
        int a, b, c, d;
        a = $urandom % 8; b = $urandom % 8; c = $urandom % 8; d = $urandom % 8;
        rx0[p][r] = (a < b) ? a : b; rx1[p][r] = (a < b) ? b : a;
        ry0[p][r] = (c < d) ? c : d; ry1[p][r] = (c < d) ? d : c;
        rv[p][r]  = ($urandom % 4) != 0;
        @(negedge clk);
        cfg_we = 1; cfg_port = 2'(p); cfg_idx = 1'(r);
        cfg_rect = {rv[p][r], coord_t'(rx0[p][r]), coord_t'(ry0[p][r]),
                    coord_t'(rx1[p][r]), coord_t'(ry1[p][r])};
        @(negedge clk);
        cfg_we = 0;
      end
  endtask

  initial begin
    cfg_we = 0; cfg_port = 0; cfg_idx = 0; cfg_rect = '0;
    valid = '0; dst_x = '0; dst_y = '0; in_ports = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // after reset nothing is filtered
    for (int q = 0; q < NQ; q++) begin valid[q] = 1; in_ports[q] = 5'b01111; end
    #1;
    for (int q = 0; q < NQ; q++) `CHECK(out_ports[q] == 5'b01111 && !drop[q], "reset: no region")
    for (int round = 0; round < 20; round++) begin
      load_random();
      for (int i = 0; i < 200; i++) begin
        for (int q = 0; q < NQ; q++) begin
          valid[q] = $urandom % 2; dst_x[q] = coord_t'($urandom % 8); dst_y[q] = coord_t'($urandom % 8);
          in_ports[q] = 5'($urandom);
        end
        #1;
        for (int q = 0; q < NQ; q++) begin
          logic [4:0] e;
          e = in_ports[q];
          for (int p = 0; p < 4; p++)
            for (int r = 0; r < NREG; r++)
              if (rv[p][r] && dst_x[q] >= rx0[p][r] && dst_x[q] <= rx1[p][r] &&
                  dst_y[q] >= ry0[p][r] && dst_y[q] <= ry1[p][r]) e[p] = 1'b0;
          `CHECK(out_ports[q] == e, "filtered mask")
          `CHECK(drop[q] == (valid[q] && e == '0), "drop flag")
          if (drop[q]) drops++;
        end
        @(negedge clk);
      end
    end
    `CHECK(drops > 0, "drops happened")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
