// Testbench of asap_scheduler. A reference ASAP model in the testbench
// computes start times and makespan for the same task graph and mapping;
// a directed graph checks communication cost, PE contention and release
// times by hand, then random topological graphs and mappings are
// compared with the model. It also checks the done latency (NTASKS+1).
`include "tb_check.svh"
module tb_asap_scheduler;
  localparam int NT = 4, NTASKS = 8, TIME_W = 16, PE_W = 2, TW = 3;
  logic clk = 0, rst_n = 0;
  logic tg_we; logic [TW-1:0] tg_task;
  logic [TIME_W-1:0] tg_release, tg_wcet, tg_weight;
  logic [NTASKS-1:0] tg_preds;
  logic start, done;
  logic [NTASKS-1:0][PE_W-1:0] mapping;
  logic [NTASKS-1:0][TIME_W-1:0] sched_start;
  logic [TIME_W-1:0] makespan;
  int checks = 0, failures = 0;

  int rel[NTASKS], wc[NTASKS], wt[NTASKS], mp[NTASKS];
  bit [NTASKS-1:0] pr[NTASKS];
  int exp_start[NTASKS], exp_span;

  asap_scheduler #(.NT(NT), .NTASKS(NTASKS), .TIME_W(TIME_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_tg();
    for (int t = 0; t < NTASKS; t++) begin
      @(negedge clk);
      tg_we = 1; tg_task = TW'(t);
      tg_release = TIME_W'(rel[t]); tg_wcet = TIME_W'(wc[t]);
      tg_weight = TIME_W'(wt[t]); tg_preds = pr[t];
    end
    @(negedge clk); tg_we = 0;
  endtask

  task automatic model();
    int fin[NTASKS], free[NT];
    for (int p = 0; p < NT; p++) free[p] = 0;
    exp_span = 0;
    for (int t = 0; t < NTASKS; t++) begin
      int ready, b;
      ready = rel[t];
      for (int p = 0; p < t; p++)
        if (pr[t][p]) begin
          int a;
          a = fin[p] + ((mp[p] != mp[t]) ? wt[p] : 0);
          if (a > ready) ready = a;
        end
      b = (free[mp[t]] > ready) ? free[mp[t]] : ready;
      exp_start[t] = b;
      fin[t] = b + wc[t];
      free[mp[t]] = fin[t];
      if (fin[t] > exp_span) exp_span = fin[t];
    end
  endtask

  task automatic run_and_check(input string what);
    int cyc;
    for (int t = 0; t < NTASKS; t++) mapping[t] = PE_W'(mp[t]);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    `CHECK(cyc == NTASKS + 1, $sformatf("%s: done after %0d cycles", what, cyc))
    model();
    for (int t = 0; t < NTASKS; t++)
      `CHECK(int'(sched_start[t]) == exp_start[t],
             $sformatf("%s: task %0d start %0d, expected %0d", what, t, sched_start[t], exp_start[t]))
    `CHECK(int'(makespan) == exp_span, $sformatf("%s: makespan %0d, expected %0d", what, makespan, exp_span))
  endtask

  initial begin
    tg_we = 0; tg_task = 0; tg_release = 0; tg_wcet = 0; tg_weight = 0; tg_preds = 0;
    start = 0; mapping = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // Directed: chain 0->1->2, task 3 depends on 0, tasks 4..7 independent.
    for (int t = 0; t < NTASKS; t++) begin
      rel[t] = 0; wc[t] = 10; wt[t] = 5; pr[t] = '0;
    end
    pr[1] = 8'b0000_0001; pr[2] = 8'b0000_0010; pr[3] = 8'b0000_0001;
    rel[4] = 7;
    mp = '{0, 0, 1, 0, 2, 3, 3, 1};
    load_tg();
    run_and_check("directed");
    // same PE, no cost: task1 starts at 10; other PE pays 5: task2 at 25;
    // task 3 waits for PE 0 (busy until 20); task 4 released at 7;
    // tasks 5 and 6 share PE 3; task 7 waits for task 2 on PE 1.
    `CHECK(sched_start[1] == 10 && sched_start[2] == 25 && sched_start[3] == 20,
           "directed: chain and communication cost")
    `CHECK(sched_start[4] == 7 && sched_start[5] == 0 && sched_start[6] == 10 && sched_start[7] == 35,
           "directed: release time and PE contention")
    `CHECK(makespan == 45, "directed: makespan 45")

    // A start while the tables are idle after reset-like graph: all zero.
    for (int t = 0; t < NTASKS; t++) begin
      rel[t] = 0; wc[t] = 0; wt[t] = 0; pr[t] = '0; mp[t] = 0;
    end
    load_tg();
    run_and_check("empty graph");

    // Random topological graphs and mappings.
    for (int it = 0; it < 300; it++) begin
      for (int t = 0; t < NTASKS; t++) begin
        rel[t] = $urandom_range(0, 40);
        wc[t]  = $urandom_range(1, 30);
        wt[t]  = $urandom_range(0, 15);
        pr[t]  = NTASKS'($urandom) & NTASKS'((1 << t) - 1);
        mp[t]  = $urandom_range(0, NT - 1);
      end
      load_tg();
      run_and_check($sformatf("random %0d", it));
      // a second mapping on the same graph
      for (int t = 0; t < NTASKS; t++) mp[t] = $urandom_range(0, NT - 1);
      run_and_check($sformatf("remap %0d", it));
    end

    // start while running is ignored: results equal a single run
    @(negedge clk); start = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int t = 0; t < NTASKS; t++)
      `CHECK(int'(sched_start[t]) == exp_start[t], "restart ignored while busy")

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
