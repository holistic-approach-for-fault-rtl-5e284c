// asap_scheduler: As-Soon-As-Possible scheduler of the task graph for a
// given mapping.
//
// The task graph is held in registers, written through tg_we before use:
// per task a release time, a worst-case execution time (WCET), a bit mask
// of its predecessors and the communication weight of its outgoing edges.
// Tasks must be numbered in a topological order (every predecessor has a
// lower index); an assertion checks this on every write.
//
// After start (ignored while a run is in progress), one task is scheduled per cycle in index order:
//   ready  = max(release, max over predecessors p of finish[p] + comm(p))
//            where comm(p) = weight[p] if p runs on another PE, else 0
//   begin  = max(ready, time at which the task's PE becomes free)
//   finish = begin + WCET, and the PE is busy until finish.
// done pulses NTASKS+1 cycles after start; sched_start holds each task's
// start time and makespan the latest finish time until the next start.
//
// The source design asks for an ASAP scheduler that rebuilds the schedule
// from a stored mapping in linear time (stored mappings carry no times),
// and says the task graph holds release times, WCETs, dependencies and
// edge weights. The storage format, a single outgoing weight per task, the
// zero cost of same-PE communication, one task per PE at a time in index
// order, and the time width are this design's choices.
module asap_scheduler #(
  parameter int unsigned NT     = 4,
  parameter int unsigned NTASKS = 8,
  parameter int unsigned TIME_W = 16,
  localparam int unsigned PE_W  = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned TW    = (NTASKS > 1) ? $clog2(NTASKS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // task-graph write port
  input  logic                          tg_we,
  input  logic [TW-1:0]                 tg_task,
  input  logic [TIME_W-1:0]             tg_release,
  input  logic [TIME_W-1:0]             tg_wcet,
  input  logic [NTASKS-1:0]             tg_preds,
  input  logic [TIME_W-1:0]             tg_weight,
  // scheduling
  input  logic                          start,
  input  logic [NTASKS-1:0][PE_W-1:0]   mapping,
  output logic                          done,
  output logic [NTASKS-1:0][TIME_W-1:0] sched_start,
  output logic [TIME_W-1:0]             makespan
);
  logic [TIME_W-1:0] release_r [NTASKS];
  logic [TIME_W-1:0] wcet_r    [NTASKS];
  logic [TIME_W-1:0] weight_r  [NTASKS];
  logic [NTASKS-1:0] preds_r   [NTASKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTASKS; t++) begin
        release_r[t] <= '0;
        wcet_r[t]    <= '0;
        weight_r[t]  <= '0;
        preds_r[t]   <= '0;
      end
    end else if (tg_we && (int'(tg_task) < NTASKS)) begin
      release_r[tg_task] <= tg_release;
      wcet_r[tg_task]    <= tg_wcet;
      weight_r[tg_task]  <= tg_weight;
      preds_r[tg_task]   <= tg_preds;
    end
  end

  logic [NTASKS-1:0][PE_W-1:0]   map_q;
  logic [NTASKS-1:0][TIME_W-1:0] finish;
  logic [NT-1:0][TIME_W-1:0]     pe_free;
  logic [TW:0]                   cur;
  logic                          run;

  // scheduling step for task cur
  logic [TW-1:0]     ct;
  logic [TIME_W-1:0] ready, arr, begin_t, finish_t;
  always_comb begin
    ct    = TW'(cur);
    ready = release_r[ct];
    for (int p = 0; p < NTASKS; p++) begin
      arr = finish[p] + ((map_q[p] != map_q[ct]) ? weight_r[p] : '0);
      if (preds_r[ct][p] && (arr > ready)) ready = arr;
    end
    begin_t  = (pe_free[map_q[ct]] > ready) ? pe_free[map_q[ct]] : ready;
    finish_t = begin_t + wcet_r[ct];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run         <= 1'b0;
      done        <= 1'b0;
      cur         <= '0;
      map_q       <= '0;
      finish      <= '0;
      pe_free     <= '0;
      sched_start <= '0;
      makespan    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run      <= 1'b1;
        cur      <= '0;
        map_q    <= mapping;
        finish   <= '0;
        pe_free  <= '0;
        makespan <= '0;
      end else if (run) begin
        sched_start[ct] <= begin_t;
        finish[ct]      <= finish_t;
        pe_free[map_q[ct]] <= finish_t;
        if (finish_t > makespan) makespan <= finish_t;
        if (cur == (TW+1)'(NTASKS - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
        cur <= cur + 1'b1;
      end
    end
  end

  // Task numbering must be topological.
  a_topological: assert property (@(posedge clk) disable iff (!rst_n)
    tg_we |-> ((tg_preds >> tg_task) == '0));

endmodule
