// End-to-end testbench of ft_manycore at its default size (2x2 mesh,
// 8 tasks, 8 MPM entries), with a behavioural mapper. It runs the whole
// fault-management loop and counts every mechanism; a mechanism that
// never happens is a failure:
//   boot       initial Map-and-Deploy (MPM miss, mapper called, all tasks)
//   traffic    random PE-to-PE packets delivered unchanged
//   aging      aging byte written into the SHM, no order
//   store      predicted fault on PE 1 -> Map-and-Store, SHM restored
//   hit        PE 1 really fails -> Map-and-Deploy hits the MPM, mapper
//              not called, only the tasks that move are redeployed
//   parity     stuck-at wire on link 0->E -> parity error -> link Broken
//              in SHM -> Map-and-Deploy (miss)
//   checker    stuck-at-0 on an arbiter grant -> arbiter checker -> turns
//              Broken -> Map-and-Deploy
//   ignored    a report about the already broken PE 1 is ignored
//   drop       NoCDepend region -> the router drops an unreachable packet
//   sched      after every Map-and-Deploy the ASAP schedule equals a
//              reference model computed on the deployed mapping
`include "tb_check.svh"
module tb_ft_manycore;
  import ftnoc_pkg::*;
  localparam int COLS = 2, ROWS = 2, NT = 4, NTASKS = 8, PE_W = 2, MAP_LAT = 30;
  logic clk = 0, rst_n = 0;
  logic  [NT-1:0] pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
  flit_t [NT-1:0] pe_in_flit, pe_out_flit;
  logic  [NT-1:0][NPORTS-1:0] drop;
  logic  [NT-1:0] cfg_lbdr_we, cfg_nd_we;
  logic  [3:0] cfg_conn; logic [7:0] cfg_rbits; logic [1:0] cfg_nd_port; logic [0:0] cfg_nd_idx;
  logic  [4*COORD_W:0] cfg_nd_rect;
  router_fi_t [NT-1:0] fi;
  logic [4*NT-1:0] link_sa1;
  logic pe_fault_valid; logic [PE_W-1:0] pe_fault_id;
  logic aging_valid, aging_ready; logic [PE_W-1:0] aging_pe; logic [7:0] aging_val;
  logic predict_valid, predict_ready; logic [2:0] predict_addr; logic [WORD_W-1:0] predict_mask;
  logic map_req_valid, map_rsp_valid; logic [TAG_W-1:0] map_req_tag, fault_tag;
  logic [NT-1:0] map_req_pe_broken; logic [NTASKS-1:0][PE_W-1:0] map_rsp_map;
  logic deploy_valid; logic [2:0] deploy_task; logic [PE_W-1:0] deploy_pe;
  logic msu_done, msu_hit, ev_fault, ev_ignored, ev_deploy, ev_store;
  localparam int TIME_W = 16;
  logic tg_we; logic [2:0] tg_task; logic [TIME_W-1:0] tg_release, tg_wcet, tg_weight;
  logic [NTASKS-1:0] tg_preds; logic sched_done;
  logic [NTASKS-1:0][TIME_W-1:0] sched_start; logic [TIME_W-1:0] makespan;
  int n_sched = 0;
  int requests;
  int checks = 0, failures = 0;
  int cur_map[NTASKS];
  int n_deploys = 0, n_done = 0, n_hit = 0, n_ignored = 0, n_drop = 0, n_store = 0, n_orders = 0;
  int sent = 0, recv = 0, seq = 0;
  flit_t inflight[int];
  bit monitor_on = 1;
  // mechanism counters
  int m_boot, m_traffic, m_aging, m_store, m_hit, m_partial, m_parity, m_checker, m_ignored, m_drop, m_sched;

  ft_manycore dut (.*);

  // Task graph: task t depends on t-1 when t is odd and on t-2 when t >= 4;
  // WCET 10+t, outgoing weight 4, task 5 released at 12.
  function automatic int tg_rel(int t); return (t == 5) ? 12 : 0; endfunction
  function automatic int tg_wc(int t); return 10 + t; endfunction
  function automatic bit [NTASKS-1:0] tg_pr(int t);
    bit [NTASKS-1:0] m;
    m = '0;
    if (t % 2 == 1) m[t-1] = 1'b1;
    if (t >= 4) m[t-2] = 1'b1;
    return m;
  endfunction

  initial begin
    tg_we = 0; tg_task = 0; tg_release = 0; tg_wcet = 0; tg_weight = 0; tg_preds = 0;
    @(posedge rst_n);
    for (int t = 0; t < NTASKS; t++) begin
      @(negedge clk);
      tg_we = 1; tg_task = 3'(t); tg_release = TIME_W'(tg_rel(t));
      tg_wcet = TIME_W'(tg_wc(t)); tg_weight = 16'd4; tg_preds = tg_pr(t);
    end
    @(negedge clk); tg_we = 0;
  end

  // reference ASAP schedule on the mapping the testbench saw deployed
  always @(posedge clk) if (rst_n && sched_done) begin
    int fin[NTASKS], free[NT], span, ok;
    for (int p = 0; p < NT; p++) free[p] = 0;
    span = 0; ok = 1;
    for (int t = 0; t < NTASKS; t++) begin
      int ready, b;
      ready = tg_rel(t);
      for (int p = 0; p < t; p++)
        if (tg_pr(t)[p]) begin
          int a;
          a = fin[p] + ((cur_map[p] != cur_map[t]) ? 4 : 0);
          if (a > ready) ready = a;
        end
      b = (free[cur_map[t]] > ready) ? free[cur_map[t]] : ready;
      if (int'(sched_start[t]) != b) ok = 0;
      fin[t] = b + tg_wc(t);
      free[cur_map[t]] = fin[t];
      if (fin[t] > span) span = fin[t];
    end
    `CHECK(ok == 1 && int'(makespan) == span,
           $sformatf("ASAP schedule after deploy %0d (makespan %0d, expected %0d)", n_sched, makespan, span))
    n_sched++;
  end
  mapper_model #(.NT(NT), .NTASKS(NTASKS), .PE_W(PE_W), .MAP_LAT(MAP_LAT)) u_map (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (deploy_valid) begin n_deploys++; cur_map[deploy_task] = int'(deploy_pe); end
    if (msu_done) begin n_done++; if (msu_hit) n_hit++; end
    if (ev_ignored) n_ignored++;
    if (ev_store) n_store++;
    if (ev_deploy) n_orders++;
    for (int t = 0; t < NT; t++) if (drop[t] != '0) n_drop++;
    for (int t = 0; t < NT; t++)
      if (monitor_on && pe_out_valid[t] && pe_out_ready[t]) begin
        int s;
        s = int'(pe_out_flit[t].payload);
        recv++;
        `CHECK(int'(pe_out_flit[t].dst_x) == t % COLS && int'(pe_out_flit[t].dst_y) == t / COLS,
               "packet reached its tile")
        `CHECK(inflight.exists(s) && inflight[s] == pe_out_flit[t], "packet unchanged")
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

  task automatic wait_idle(input int cycles);
    repeat (cycles) @(negedge clk);
  endtask

  task automatic send(input int src, dst, input logic [15:0] pl, input bit expect_arrival);
    @(negedge clk);
    pe_in_valid[src] = 1; pe_in_flit[src] = mk(src, dst, int'(pl));
    if (expect_arrival) inflight[int'(pl)] = pe_in_flit[src];
    @(posedge clk); while (!pe_in_ready[src]) @(posedge clk);
    @(negedge clk); pe_in_valid[src] = 0;
  endtask

  initial begin
    int d0, r0, o0;
    pe_in_valid = '0; pe_in_flit = '0; pe_out_ready = '1;
    cfg_lbdr_we = '0; cfg_nd_we = '0; cfg_conn = '0; cfg_rbits = '0;
    cfg_nd_port = '0; cfg_nd_idx = '0; cfg_nd_rect = '0;
    fi = '0; link_sa1 = '0; pe_fault_valid = 0; pe_fault_id = 0;
    aging_valid = 0; aging_pe = 0; aging_val = 0;
    predict_valid = 0; predict_addr = 0; predict_mask = 0;
    for (int t = 0; t < NTASKS; t++) cur_map[t] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // boot: initial mapping
    wait_idle(100);
    m_boot = (n_done == 1 && requests == 1 && n_deploys == NTASKS) ? 1 : 0;
    `CHECK(m_boot == 1, "initial deployment of all tasks")
    for (int t = 0; t < NTASKS; t++) `CHECK(cur_map[t] == t % NT, "initial mapping")

    // traffic
    for (int c = 0; c < 500; c++) begin
      @(negedge clk);
      pe_out_ready = NT'($urandom) | NT'(1);
      for (int t = 0; t < NT; t++) begin
        pe_in_valid[t] = ($urandom % 3) == 0;
        pe_in_flit[t]  = mk(t, $urandom % NT, seq);
        seq++;
      end
      @(posedge clk);
      for (int t = 0; t < NT; t++)
        if (pe_in_valid[t] && pe_in_ready[t]) begin
          inflight[int'(pe_in_flit[t].payload)] = pe_in_flit[t]; sent++;
        end
    end
    @(negedge clk); pe_in_valid = '0; pe_out_ready = '1;
    wait_idle(30);
    m_traffic = recv;
    `CHECK(sent == recv && sent > 100 && inflight.size() == 0,
           $sformatf("all packets delivered (%0d/%0d)", recv, sent))

    // aging of PE 0
    @(negedge clk); aging_valid = 1; aging_pe = 0; aging_val = 8'h03;
    @(posedge clk); while (!aging_ready) @(posedge clk);
    @(negedge clk); aging_valid = 0;
    wait_idle(10);
    m_aging = (dut.u_shm.mem[0][AGE_LSB +: 8] == 8'h03) ? 1 : 0;
    `CHECK(m_aging == 1 && n_orders == 1, "aging recorded without an order")

    // predicted fault: PE 1
    @(negedge clk); predict_valid = 1; predict_addr = 1; predict_mask = WORD_W'(1);
    @(posedge clk); while (!predict_ready) @(posedge clk);
    @(negedge clk); predict_valid = 0;
    wait_idle(120);
    m_store = n_store;
    `CHECK(n_store == 1 && requests == 2 && n_done == 2, "Map-and-Store done")
    `CHECK(dut.u_shm.mem[1] == '0, "SHM restored after Map-and-Store")

    // the predicted fault occurs
    d0 = n_deploys; r0 = requests;
    @(negedge clk); pe_fault_valid = 1; pe_fault_id = 1; @(negedge clk); pe_fault_valid = 0;
    wait_idle(100);
    m_hit = n_hit;
    `CHECK(n_hit == 1 && requests == r0, "MPM hit, mapper not called")
    // the mapper places task t on healthy PE {0,2,3}[t mod 3]; the tasks
    // whose PE differs from t mod 4 are 1..7, so 7 of 8 are redeployed
    m_partial = (n_deploys - d0 == 7) ? 1 : 0;
    `CHECK(m_partial == 1, $sformatf("only the 7 moved tasks redeployed (%0d)", n_deploys - d0))
    for (int t = 0; t < NTASKS; t++) `CHECK(cur_map[t] != 1, "no task left on broken PE 1")

    // link fault: stuck-at-1 on payload bit 0 of link 0 -> E
    o0 = n_orders; r0 = requests;
    link_sa1[0*4 + P_E] = 1'b1;
    monitor_on = 0;
    send(0, 1, 16'h4000, 0);
    wait_idle(150);
    link_sa1 = '0; monitor_on = 1;
    m_parity = (dut.u_shm.mem[NT + 0][P_E] == 1'b1) ? 1 : 0;
    `CHECK(m_parity == 1, "link 0->E marked broken after parity error")
    `CHECK(n_orders == o0 + 1 && requests == r0 + 1, "link fault remapped (MPM miss)")

    // control-part fault: grant of input L at router 0 output N stuck at 0
    o0 = n_orders;
    fi[0].arb_sa0[P_N][P_L] = 1'b1;
    send(0, 2, 16'h4001, 1);
    wait_idle(150);
    fi = '0;
    wait_idle(10);
    m_checker = (dut.u_shm.mem[0][TRN_LSB + T_EN] && dut.u_shm.mem[0][TRN_LSB + T_WN]) ? 1 : 0;
    `CHECK(m_checker == 1, "arbiter checker fault marks turns EN, WN of router 0")
    `CHECK(n_orders == o0 + 1, "turn fault remapped")
    `CHECK(inflight.size() == 0, "blocked packet delivered once the fault is gone")

    // a second report about PE 1 (parity error on its local input) is ignored
    d0 = n_ignored;
    @(negedge clk);
    pe_in_valid[1] = 1; pe_in_flit[1] = mk(1, 1, 32'h4002); pe_in_flit[1].parity ^= 1'b1;
    inflight[32'h4002] = pe_in_flit[1];
    @(negedge clk); pe_in_valid = '0;
    wait_idle(40);
    m_ignored = n_ignored - d0;
    `CHECK(m_ignored == 1, "report on an already broken PE ignored")

    // NoCDepend: tile 3 unreachable through router 2's E output
    @(negedge clk);
    cfg_nd_we[2] = 1; cfg_nd_port = 2'(P_E); cfg_nd_idx = 0;
    cfg_nd_rect = {1'b1, coord_t'(1), coord_t'(1), coord_t'(1), coord_t'(1)};
    @(negedge clk); cfg_nd_we = '0;
    send(2, 3, 16'h4003, 0);
    wait_idle(20);
    m_drop = n_drop;
    `CHECK(m_drop == 1, "packet with unreachable destination dropped")
    `CHECK(inflight.size() == 0, "no packet lost")

    m_sched = n_sched;
    $display("mechanisms: boot=%0d traffic=%0d aging=%0d store=%0d hit=%0d partial=%0d parity=%0d checker=%0d ignored=%0d drop=%0d sched=%0d",
             m_boot, m_traffic, m_aging, m_store, m_hit, m_partial, m_parity, m_checker, m_ignored, m_drop, m_sched);
    `CHECK(m_boot > 0 && m_traffic > 0 && m_aging > 0 && m_store > 0 && m_hit > 0 && m_partial > 0 &&
           m_parity > 0 && m_checker > 0 && m_ignored > 0 && m_drop > 0 && m_sched > 0, "every mechanism happened")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
