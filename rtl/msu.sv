// msu: control part of the Mapper-Scheduler Unit.
//
// It serves two orders from the SHMU, handed over with cmd_valid/cmd_ready:
//
//   Map and Store  - hash the System Health Map into a fault tag, ask the
//                    mapping heuristic for a mapping of the current (here:
//                    predicted) fault configuration and store {tag,
//                    mapping} in the MPM memory (round-robin replacement).
//   Map and Deploy - hash the SHM, search the MPM for the tag. On a hit the
//                    stored mapping is used; on a miss the heuristic is
//                    asked for a new one. The mapping is then compared task
//                    by task with the Current Mapping Memory (partial
//                    mapping extraction) and only the tasks whose PE
//                    changed are deployed, one per cycle on deploy_*, and
//                    written to the CMM.
//
// done pulses for one cycle when an order is finished; done_hit tells
// whether the MPM hit. The fault tag is a CRC-16/CCITT over all SHM words,
// read one per cycle through the SHM read-only port; during the same pass
// the PE health bits are collected and sent with the mapping request, so
// the heuristic knows which PEs to avoid.
//
// Timing, in clock cycles, from the cycle after cmd is accepted:
//   hash 2*NT+1, MPM search k+2 for a hit in entry k (ENTRIES+1 for a miss),
//   extraction NTASKS+1, plus one cycle for done. The heuristic's own time
//   (T_MapAlg) is whatever the mapper takes between map_req_valid and
//   map_rsp_valid.
//
// The mapping heuristic itself is outside this block (map_req_* /
// map_rsp_*): the design description leaves it out of scope. map_out
// holds the mapping of the last order from done onwards; the top level
// feeds it to asap_scheduler after a Map-and-Deploy. Order handling,
// hit/miss flow and partial mapping extraction follow the design
// description; hash function, replacement policy, the mapper handshake
// and all timing are this design's choices.
module msu
  import ftnoc_pkg::*;
#(
  parameter int unsigned NT      = 4,
  parameter int unsigned NTASKS  = 8,
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned PE_W   = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned TW     = (NTASKS > 1) ? $clog2(NTASKS) : 1,
  localparam int unsigned EW     = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned SAW    = $clog2(2 * NT)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // orders from the SHMU
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  msu_cmd_e                     cmd,
  output logic                         done,
  output logic                         done_hit,
  output logic [TAG_W-1:0]             tag,
  // SHM, read-only port
  output logic                         shm_en,
  output logic [SAW-1:0]               shm_addr,
  input  logic [WORD_W-1:0]            shm_rdata,
  // MPM memory
  output logic                         mpm_en,
  output logic                         mpm_we,
  output logic [EW-1:0]                mpm_addr,
  output logic [TAG_W-1:0]             mpm_wtag,
  output logic [NTASKS-1:0][PE_W-1:0]  mpm_wmap,
  input  logic                         mpm_rvalid,
  input  logic [TAG_W-1:0]             mpm_rtag,
  input  logic [NTASKS-1:0][PE_W-1:0]  mpm_rmap,
  // CMM
  output logic                         cmm_we,
  output logic [TW-1:0]                cmm_waddr,
  output logic [PE_W-1:0]              cmm_wdata,
  output logic                         cmm_en,
  output logic [TW-1:0]                cmm_addr,
  input  logic                         cmm_valid,
  input  logic [PE_W-1:0]              cmm_pe,
  // mapping heuristic (outside the block)
  output logic                         map_req_valid,
  output logic [TAG_W-1:0]             map_req_tag,
  output logic [NT-1:0]                map_req_pe_broken,
  input  logic                         map_rsp_valid,
  input  logic [NTASKS-1:0][PE_W-1:0]  map_rsp_map,
  // deployment of the partial mapping to the PEs
  output logic                         deploy_valid,
  output logic [TW-1:0]                deploy_task,
  output logic [PE_W-1:0]              deploy_pe,
  // mapping used by the last order (for the scheduler)
  output logic [NTASKS-1:0][PE_W-1:0]  map_out
);
  localparam int unsigned DEPTH = 2 * NT;
  localparam int unsigned CW    = $clog2(DEPTH + ENTRIES + NTASKS + 2);

  typedef enum logic [2:0] {S_IDLE, S_HASH, S_SEARCH, S_REQ, S_MPMW, S_EXTRACT, S_DONE} state_e;

  state_e                       state;
  msu_cmd_e                     cmd_q;
  logic [CW-1:0]                cnt, addr_q;
  logic                         pend;
  logic [TAG_W-1:0]             crc;
  logic [NT-1:0]                peb;
  logic [NTASKS-1:0][PE_W-1:0]  newmap;
  logic                         hit;
  logic [EW-1:0]                wr_ptr;

  assign cmd_ready         = (state == S_IDLE);
  assign tag               = crc;
  assign map_req_valid     = (state == S_REQ);
  assign map_req_tag       = crc;
  assign map_req_pe_broken = peb;
  assign done              = (state == S_DONE);
  assign done_hit          = hit;

  // memory requests
  assign shm_en   = (state == S_HASH) && (cnt < CW'(DEPTH));
  assign shm_addr = SAW'(cnt);

  assign mpm_en   = ((state == S_SEARCH) && (cnt < CW'(ENTRIES))) || (state == S_MPMW);
  assign mpm_we   = (state == S_MPMW);
  assign mpm_addr = (state == S_MPMW) ? wr_ptr : EW'(cnt);
  assign mpm_wtag = crc;
  assign mpm_wmap = newmap;
  assign map_out  = newmap;

  assign cmm_en   = (state == S_EXTRACT) && (cnt < CW'(NTASKS));
  assign cmm_addr = TW'(cnt);

  logic [PE_W-1:0] want_pe;
  logic            differs;
  assign want_pe  = newmap[TW'(addr_q)];
  assign differs  = !(cmm_valid && (cmm_pe == want_pe));

  assign deploy_valid = (state == S_EXTRACT) && pend && differs;
  assign deploy_task  = TW'(addr_q);
  assign deploy_pe    = want_pe;
  assign cmm_we       = deploy_valid;
  assign cmm_waddr    = TW'(addr_q);
  assign cmm_wdata    = want_pe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cmd_q  <= CMD_MAP_STORE;
      cnt    <= '0;
      addr_q <= '0;
      pend   <= 1'b0;
      crc    <= CRC_INIT;
      peb    <= '0;
      newmap <= '0;
      hit    <= 1'b0;
      wr_ptr <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          pend <= 1'b0;
          cnt  <= '0;
          if (cmd_valid) begin
            cmd_q <= cmd;
            crc   <= CRC_INIT;
            peb   <= '0;
            hit   <= 1'b0;
            state <= S_HASH;
          end
        end

        S_HASH: begin
          if (cnt < CW'(DEPTH)) cnt <= cnt + 1'b1;
          pend   <= (cnt < CW'(DEPTH));
          addr_q <= cnt;
          if (pend) begin
            crc <= crc16_word(crc, shm_rdata);
            if (addr_q < CW'(NT)) peb[addr_q[PE_W-1:0]] <= shm_rdata[PE_BIT];
            if (cnt == CW'(DEPTH)) begin
              cnt   <= '0;
              pend  <= 1'b0;
              state <= (cmd_q == CMD_MAP_DEPLOY) ? S_SEARCH : S_REQ;
            end
          end
        end

        S_SEARCH: begin
          if (cnt < CW'(ENTRIES)) cnt <= cnt + 1'b1;
          pend <= (cnt < CW'(ENTRIES));
          if (pend && mpm_rvalid && (mpm_rtag == crc)) begin
            hit    <= 1'b1;
            newmap <= mpm_rmap;
            cnt    <= '0;
            pend   <= 1'b0;
            state  <= S_EXTRACT;
          end else if (pend && (cnt == CW'(ENTRIES))) begin
            cnt   <= '0;
            pend  <= 1'b0;
            state <= S_REQ;
          end
        end

        S_REQ: begin
          if (map_rsp_valid) begin
            newmap <= map_rsp_map;
            state  <= (cmd_q == CMD_MAP_STORE) ? S_MPMW : S_EXTRACT;
          end
        end

        S_MPMW: begin
          wr_ptr <= (wr_ptr == EW'(ENTRIES - 1)) ? '0 : wr_ptr + 1'b1;
          state  <= S_DONE;
        end

        S_EXTRACT: begin
          if (cnt < CW'(NTASKS)) cnt <= cnt + 1'b1;
          pend   <= (cnt < CW'(NTASKS));
          addr_q <= cnt;
          if (pend && (cnt == CW'(NTASKS))) begin
            cnt   <= '0;
            pend  <= 1'b0;
            state <= S_DONE;
          end
        end

        S_DONE: state <= S_IDLE;

        default: state <= S_IDLE;
      endcase
    end
  end

  // The mapper may answer only a pending request.
  a_rsp_needs_req: assert property (@(posedge clk) disable iff (!rst_n)
    map_rsp_valid |-> map_req_valid);

endmodule
