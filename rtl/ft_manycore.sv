// ft_manycore: fault-tolerant NoC-based many-core system, top level.
//
// Wires together the parts of the fault-management loop:
//   noc_mesh   - COLS x ROWS routers with LBDR routing, NoCDepend
//                reachability registers and online checkers; the PEs
//                attach to the pe_* ports.
//   shmu       - takes the routers' checker reports (directly; they stand
//                in for the iJTAG access network) and PE reports from test
//                programs, updates the SHM and issues orders to the MSU.
//   shm        - System Health Map, SHMU read/write, MSU read-only.
//   msu        - Mapper-Scheduler Unit control: fault tag, MPM lookup,
//                Map-and-Store, Map-and-Deploy with partial mapping.
//   mpm_mem    - Most Probable Mapping memory.
//   cmm_mem    - Current Mapping Memory (MSU writes, SHMU reads).
//   asap_scheduler - task graph and ASAP scheduler; after every
//                Map-and-Deploy it rebuilds the start time of each task
//                for the deployed mapping (sched_done pulses NTASKS+1
//                cycles after msu_done). The task graph is written through
//                tg_*.
// Parts that are not logic of this design are reached through ports: the
// PEs (pe_*), the mapping heuristic (map_*), the SHMU database that
// predicts faults (predict_*), the gateway test programs (pe_fault_*),
// aging monitors (aging_*), and the offline-computed LBDR bits and NoCDepend
// rectangles (cfg_*). fi and link_sa1 are stuck-at fault-injection hooks for
// tests; tie them to zero otherwise.
//
// Defaults: a 2x2 mesh (the size of the design's health-map example),
// 8 tasks, 8 MPM entries, 4-flit input FIFOs, 2 NoCDepend rectangles per
// router output. All of these are this design's choices.
module ft_manycore
  import ftnoc_pkg::*;
#(
  parameter int unsigned COLS        = 2,
  parameter int unsigned ROWS        = 2,
  parameter int unsigned FIFO_DEPTH  = 4,
  parameter int unsigned NREG        = 2,
  parameter int unsigned NTASKS      = 8,
  parameter int unsigned MPM_ENTRIES = 8,
  parameter int unsigned TIME_W      = 16,
  localparam int unsigned NT   = COLS * ROWS,
  localparam int unsigned PE_W = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned TW   = (NTASKS > 1) ? $clog2(NTASKS) : 1,
  localparam int unsigned SAW  = $clog2(2 * NT),
  localparam int unsigned NDW  = $clog2(NREG > 1 ? NREG : 2)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // PE network interfaces
  input  logic  [NT-1:0]               pe_in_valid,
  output logic  [NT-1:0]               pe_in_ready,
  input  flit_t [NT-1:0]               pe_in_flit,
  output logic  [NT-1:0]               pe_out_valid,
  input  logic  [NT-1:0]               pe_out_ready,
  output flit_t [NT-1:0]               pe_out_flit,
  output logic  [NT-1:0][NPORTS-1:0]   drop,
  // router configuration
  input  logic  [NT-1:0]               cfg_lbdr_we,
  input  logic  [3:0]                  cfg_conn,
  input  logic  [7:0]                  cfg_rbits,
  input  logic  [NT-1:0]               cfg_nd_we,
  input  logic  [1:0]                  cfg_nd_port,
  input  logic  [NDW-1:0]              cfg_nd_idx,
  input  logic  [4*COORD_W:0]          cfg_nd_rect,
  // fault injection (tests only)
  input  router_fi_t [NT-1:0]          fi,
  input  logic  [4*NT-1:0]             link_sa1,
  // PE fault reports, aging, predicted faults
  input  logic                         pe_fault_valid,
  input  logic  [PE_W-1:0]             pe_fault_id,
  input  logic                         aging_valid,
  output logic                         aging_ready,
  input  logic  [PE_W-1:0]             aging_pe,
  input  logic  [7:0]                  aging_val,
  input  logic                         predict_valid,
  output logic                         predict_ready,
  input  logic  [SAW-1:0]              predict_addr,
  input  logic  [WORD_W-1:0]           predict_mask,
  // mapping heuristic
  output logic                         map_req_valid,
  output logic  [TAG_W-1:0]            map_req_tag,
  output logic  [NT-1:0]               map_req_pe_broken,
  input  logic                         map_rsp_valid,
  input  logic  [NTASKS-1:0][PE_W-1:0] map_rsp_map,
  // deployment
  output logic                         deploy_valid,
  output logic  [TW-1:0]               deploy_task,
  output logic  [PE_W-1:0]             deploy_pe,
  // status
  output logic                         msu_done,
  output logic                         msu_hit,
  output logic  [TAG_W-1:0]            fault_tag,
  output logic                         ev_fault,
  output logic                         ev_ignored,
  output logic                         ev_deploy,
  output logic                         ev_store,
  // task graph and schedule
  input  logic                         tg_we,
  input  logic  [TW-1:0]               tg_task,
  input  logic  [TIME_W-1:0]           tg_release,
  input  logic  [TIME_W-1:0]           tg_wcet,
  input  logic  [NTASKS-1:0]           tg_preds,
  input  logic  [TIME_W-1:0]           tg_weight,
  output logic                         sched_done,
  output logic  [NTASKS-1:0][TIME_W-1:0] sched_start,
  output logic  [TIME_W-1:0]           makespan
);
  chk_report_t [NT-1:0] report;

  noc_mesh #(.COLS(COLS), .ROWS(ROWS), .FIFO_DEPTH(FIFO_DEPTH), .NREG(NREG)) u_noc (
    .clk, .rst_n,
    .pe_in_valid, .pe_in_ready, .pe_in_flit,
    .pe_out_valid, .pe_out_ready, .pe_out_flit,
    .cfg_lbdr_we, .cfg_conn, .cfg_rbits,
    .cfg_nd_we, .cfg_nd_port, .cfg_nd_idx, .cfg_nd_rect,
    .fi, .link_sa1, .report, .drop
  );

  // SHM
  logic              sa_en, sa_we, sb_en;
  logic [SAW-1:0]    sa_addr, sb_addr;
  logic [WORD_W-1:0] sa_wdata, sa_rdata, sb_rdata;

  shm #(.NT(NT)) u_shm (
    .clk, .rst_n,
    .a_en(sa_en), .a_we(sa_we), .a_addr(sa_addr), .a_wdata(sa_wdata), .a_rdata(sa_rdata),
    .b_en(sb_en), .b_addr(sb_addr), .b_rdata(sb_rdata)
  );

  // CMM
  logic            cmm_we, cmm_aen, cmm_ben, cmm_avalid, cmm_bvalid;
  logic [TW-1:0]   cmm_waddr, cmm_aaddr, cmm_baddr;
  logic [PE_W-1:0] cmm_wdata, cmm_ape, cmm_bpe;

  cmm_mem #(.NTASKS(NTASKS), .PE_W(PE_W)) u_cmm (
    .clk, .rst_n,
    .we(cmm_we), .waddr(cmm_waddr), .wdata(cmm_wdata),
    .a_en(cmm_aen), .a_addr(cmm_aaddr), .a_valid(cmm_avalid), .a_pe(cmm_ape),
    .b_en(cmm_ben), .b_addr(cmm_baddr), .b_valid(cmm_bvalid), .b_pe(cmm_bpe)
  );

  // MPM
  localparam int unsigned EW = (MPM_ENTRIES > 1) ? $clog2(MPM_ENTRIES) : 1;
  logic                        mpm_en, mpm_we, mpm_rvalid;
  logic [EW-1:0]               mpm_addr;
  logic [TAG_W-1:0]            mpm_wtag, mpm_rtag;
  logic [NTASKS-1:0][PE_W-1:0] mpm_wmap, mpm_rmap;

  mpm_mem #(.ENTRIES(MPM_ENTRIES), .NTASKS(NTASKS), .PE_W(PE_W)) u_mpm (
    .clk, .rst_n,
    .en(mpm_en), .we(mpm_we), .addr(mpm_addr), .wtag(mpm_wtag), .wmap(mpm_wmap),
    .rvalid(mpm_rvalid), .rtag(mpm_rtag), .rmap(mpm_rmap)
  );

  // SHMU <-> MSU orders
  logic     cmd_valid, cmd_ready;
  msu_cmd_e cmd;

  shmu #(.COLS(COLS), .ROWS(ROWS), .NTASKS(NTASKS)) u_shmu (
    .clk, .rst_n,
    .report, .pe_fault_valid, .pe_fault_id,
    .aging_valid, .aging_ready, .aging_pe, .aging_val,
    .predict_valid, .predict_ready, .predict_addr, .predict_mask,
    .shm_en(sa_en), .shm_we(sa_we), .shm_addr(sa_addr), .shm_wdata(sa_wdata), .shm_rdata(sa_rdata),
    .cmm_en(cmm_ben), .cmm_addr(cmm_baddr), .cmm_valid(cmm_bvalid), .cmm_pe(cmm_bpe),
    .cmd_valid, .cmd_ready, .cmd, .msu_done,
    .ev_fault, .ev_ignored, .ev_deploy, .ev_store
  );

  logic [NTASKS-1:0][PE_W-1:0] cur_map;

  msu #(.NT(NT), .NTASKS(NTASKS), .ENTRIES(MPM_ENTRIES)) u_msu (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .done(msu_done), .done_hit(msu_hit), .tag(fault_tag),
    .shm_en(sb_en), .shm_addr(sb_addr), .shm_rdata(sb_rdata),
    .mpm_en, .mpm_we, .mpm_addr, .mpm_wtag, .mpm_wmap, .mpm_rvalid, .mpm_rtag, .mpm_rmap,
    .cmm_we, .cmm_waddr, .cmm_wdata, .cmm_en(cmm_aen), .cmm_addr(cmm_aaddr),
    .cmm_valid(cmm_avalid), .cmm_pe(cmm_ape),
    .map_req_valid, .map_req_tag, .map_req_pe_broken, .map_rsp_valid, .map_rsp_map,
    .deploy_valid, .deploy_task, .deploy_pe, .map_out(cur_map)
  );

  // Reschedule after every Map-and-Deploy.
  logic last_deploy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       last_deploy <= 1'b0;
    else if (cmd_valid && cmd_ready)  last_deploy <= (cmd == CMD_MAP_DEPLOY);
  end

  asap_scheduler #(.NT(NT), .NTASKS(NTASKS), .TIME_W(TIME_W)) u_sched (
    .clk, .rst_n,
    .tg_we, .tg_task, .tg_release, .tg_wcet, .tg_preds, .tg_weight,
    .start(msu_done && last_deploy), .mapping(cur_map),
    .done(sched_done), .sched_start, .makespan
  );

endmodule
