// Testbench of router: the centre router (1,1) of a 3x3 mesh. Random
// single-flit packets enter all five inputs with random destinations and
// random downstream back-pressure. Every flit must leave on the XY output
// (worked out here from the coordinates), unchanged and in order per
// input/output pair. Also checked: the one-cycle minimum latency, the
// parity checker report, the NoCDepend drop, and the arbiter checker
// report under an injected stuck-at fault.
`include "tb_check.svh"
module tb_router;
  import ftnoc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic  [4:0] in_valid, in_ready, out_valid, out_ready, drop;
  flit_t [4:0] in_flit, out_flit;
  logic cfg_lbdr_we = 0, cfg_nd_we = 0;
  logic [3:0] cfg_conn = '0;
  logic [7:0] cfg_rbits = '0;
  logic [1:0] cfg_nd_port = '0;
  logic [0:0] cfg_nd_idx = '0;
  logic [4*COORD_W:0] cfg_nd_rect = '0;
  router_fi_t fi;
  chk_report_t report;
  int checks = 0, failures = 0;
  int sent = 0, recv = 0, seq = 0, par_seen = 0, drops = 0;
  flit_t expq[5][5][$];

  router #(.X(1), .Y(1), .COLS(3), .ROWS(3)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xy_port(input int dx, dy);
    if (dx > 1) return P_E;
    if (dx < 1) return P_W;
    if (dy > 1) return P_N;
    if (dy < 1) return P_S;
    return P_L;
  endfunction

  function automatic flit_t mk(input int src, input int dx, dy, input int s);
    flit_t f;
    f = '0;
    f.dst_x = coord_t'(dx); f.dst_y = coord_t'(dy);
    f.payload = {3'(src), 13'(s)};
    return add_parity(f);
  endfunction

  // output monitor
  bit fault_phase = 0;
  always @(posedge clk) if (rst_n && !fault_phase) begin
    for (int o = 0; o < 5; o++)
      if (out_valid[o] && out_ready[o]) begin
        int src;
        src = int'(out_flit[o].payload[15:13]);
        recv++;
        if (expq[src][o].size() == 0) begin
          checks++; failures++;
          $display("FAIL unexpected flit on output %0d from %0d", o, src);
        end else begin
          `CHECK(out_flit[o] == expq[src][o].pop_front(), "flit content/order")
        end
      end
  end

  // random traffic phase
  task automatic traffic(input int cycles);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      out_ready = 5'($urandom);
      for (int p = 0; p < 5; p++) begin
        int dx, dy;
        // keep packets minimal: an input never receives traffic for its own side
        do begin dx = $urandom % 3; dy = $urandom % 3; end
        while ((p == P_N && dy == 2) || (p == P_S && dy == 0) ||
               (p == P_E && dx == 2) || (p == P_W && dx == 0) ||
               (p != P_L && dx == 1 && dy == 1 && 0));
        in_valid[p] = ($urandom % 2) != 0;
        in_flit[p]  = mk(p, dx, dy, seq++);
      end
      @(posedge clk);
      for (int p = 0; p < 5; p++)
        if (in_valid[p] && in_ready[p]) begin
          expq[p][xy_port(in_flit[p].dst_x, in_flit[p].dst_y)].push_back(in_flit[p]);
          sent++;
        end
    end
    @(negedge clk);
    in_valid = '0; out_ready = '1;
    repeat (30) @(negedge clk);
  endtask

  initial begin
    fi = '0; in_valid = '0; in_flit = '0; out_ready = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    traffic(3000);
    `CHECK(sent == recv && sent > 1000, $sformatf("all flits delivered (%0d sent, %0d received)", sent, recv))
    `CHECK(report == '0, "no checker alarm in fault-free run")

    // minimum latency: flit written at edge t leaves at edge t+1
    @(negedge clk);
    in_valid[P_W] = 1; in_flit[P_W] = mk(P_W, 2, 1, 1);
    @(negedge clk);
    in_valid = '0;
    `CHECK(out_valid[P_E] && out_flit[P_E] == mk(P_W, 2, 1, 1), "one-cycle latency west->east")
    expq[P_W][P_E].push_back(mk(P_W, 2, 1, 1));
    @(negedge clk);

    // parity error on the north input: report one cycle later
    in_valid[P_N] = 1; in_flit[P_N] = mk(P_N, 1, 0, 2); in_flit[P_N].parity ^= 1'b1;
    expq[P_N][P_S].push_back(in_flit[P_N]);
    @(negedge clk);
    in_valid = '0;
    `CHECK(report.parity_err == 5'b00001, "parity error reported for input N")
    @(negedge clk);
    `CHECK(report.parity_err == 5'b00000, "parity report is a pulse")

    // NoCDepend: (2,1) unreachable through E -> packet dropped
    cfg_nd_we = 1; cfg_nd_port = 2'(P_E); cfg_nd_idx = 0;
    cfg_nd_rect = {1'b1, coord_t'(2), coord_t'(0), coord_t'(2), coord_t'(2)};
    @(negedge clk); cfg_nd_we = 0;
    in_valid[P_L] = 1; in_flit[P_L] = mk(P_L, 2, 1, 3);
    @(negedge clk); in_valid = '0;
    `CHECK(!out_valid[P_E], "dropped packet not forwarded")
    @(negedge clk);
    `CHECK(drop[P_L], "drop reported for local input")
    repeat (3) @(negedge clk);
    `CHECK(!dut.hv[P_L], "dropped packet removed from buffer")

    // arbiter of output S: grant line for input L stuck at 1
    fault_phase = 1;
    fi.arb_sa1[P_S][P_L] = 1'b1;
    repeat (3) @(negedge clk);
    `CHECK(report.arb_err[P_S], "arbiter checker reports stuck-at-1")
    fi = '0;
    repeat (3) @(negedge clk);
    for (int p = 0; p < 5; p++) for (int o = 0; o < 5; o++)
      `CHECK(expq[p][o].size() == 0, "no flit left undelivered")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
