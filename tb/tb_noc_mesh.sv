// Testbench of noc_mesh (3x3): random all-to-all single-flit traffic with
// random PE back-pressure; each flit must arrive unchanged at its
// destination PE, and all must arrive. Then a stuck-at-1 wire on one link
// must be reported by the parity checker of the receiving router, on the
// right input, and a NoCDepend region must make the source router drop a
// packet.
`include "tb_check.svh"
module tb_noc_mesh;
  import ftnoc_pkg::*;
  localparam int COLS = 3, ROWS = 3, NT = COLS * ROWS;
  logic clk = 0, rst_n = 0;
  logic  [NT-1:0] pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
  flit_t [NT-1:0] pe_in_flit, pe_out_flit;
  logic  [NT-1:0] cfg_lbdr_we = '0, cfg_nd_we = '0;
  logic  [3:0] cfg_conn = '0;
  logic  [7:0] cfg_rbits = '0;
  logic  [1:0] cfg_nd_port = '0;
  logic  [0:0] cfg_nd_idx = '0;
  logic  [4*COORD_W:0] cfg_nd_rect = '0;
  router_fi_t [NT-1:0] fi;
  logic [4*NT-1:0] link_sa1;
  chk_report_t [NT-1:0] report;
  logic [NT-1:0][NPORTS-1:0] drop;
  int checks = 0, failures = 0, sent = 0, recv = 0, seq = 0;
  flit_t inflight[int];   // keyed by sequence number

  noc_mesh #(.COLS(COLS), .ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int t = 0; t < NT; t++)
      if (pe_out_valid[t] && pe_out_ready[t]) begin
        int s;
        s = int'(pe_out_flit[t].payload);
        recv++;
        `CHECK(int'(pe_out_flit[t].dst_x) == t % COLS && int'(pe_out_flit[t].dst_y) == t / COLS,
               "delivered to its destination")
        `CHECK(inflight.exists(s) && inflight[s] == pe_out_flit[t], "flit unchanged")
        inflight.delete(s);
      end
  end

  function automatic flit_t mk(input int src, dst, s);
    flit_t f;
    f = '0;
    f.src_x = coord_t'(src % COLS); f.src_y = coord_t'(src / COLS);
    f.dst_x = coord_t'(dst % COLS); f.dst_y = coord_t'(dst / COLS);
    f.payload = 16'(s);
    return add_parity(f);
  endfunction

  initial begin
    fi = '0; link_sa1 = '0; pe_in_valid = '0; pe_in_flit = '0; pe_out_ready = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      pe_out_ready = NT'($urandom);
      for (int t = 0; t < NT; t++) begin
        pe_in_valid[t] = ($urandom % 3) == 0;
        pe_in_flit[t]  = mk(t, $urandom % NT, seq % 65536);
        seq++;
      end
      @(posedge clk);
      for (int t = 0; t < NT; t++)
        if (pe_in_valid[t] && pe_in_ready[t]) begin
          inflight[int'(pe_in_flit[t].payload)] = pe_in_flit[t];
          sent++;
        end
    end
    @(negedge clk); pe_in_valid = '0; pe_out_ready = '1;
    repeat (50) @(negedge clk);
    `CHECK(sent == recv && sent > 1000, $sformatf("all delivered: %0d sent, %0d received", sent, recv))
    `CHECK(inflight.size() == 0, "nothing lost")
    `CHECK(report == '0 && drop == '0, "no alarm and no drop in fault-free run")

    // stuck-at-1 on payload bit 0 of link 0 -> E (router 0 to router 1)
    link_sa1[0*4 + P_E] = 1'b1;
    pe_in_valid[0] = 1; pe_in_flit[0] = mk(0, 1, 16'h0010);
    inflight[16'h0011] = mk(0, 1, 16'h0010);
    inflight[16'h0011].payload[0] = 1'b1;   // arrives corrupted, parity wrong
    @(negedge clk); pe_in_valid = '0;
    begin
      int seen;
      seen = 0;
      repeat (4) begin @(negedge clk); if (report[1].parity_err[P_W]) seen++; end
      `CHECK(seen == 1, "parity error reported by router 1 on input W")
    end
    link_sa1 = '0;
    repeat (5) @(negedge clk);

    // router 4 (centre) told that tile 5 is unreachable via E: packet from PE 4 dropped
    cfg_nd_we[4] = 1; cfg_nd_port = 2'(P_E); cfg_nd_idx = 0;
    cfg_nd_rect = {1'b1, coord_t'(2), coord_t'(1), coord_t'(2), coord_t'(1)};
    @(negedge clk); cfg_nd_we = '0;
    pe_in_valid[4] = 1; pe_in_flit[4] = mk(4, 5, 16'h0020);
    @(negedge clk); pe_in_valid = '0;
    begin
      int seen, got;
      seen = 0; got = recv;
      repeat (10) begin @(negedge clk); if (drop[4][P_L]) seen++; end
      `CHECK(seen == 1, "router 4 dropped the unreachable packet")
      `CHECK(recv == got, "dropped packet not delivered")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
