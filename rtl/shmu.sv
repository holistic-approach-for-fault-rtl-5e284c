// shmu: System Health Monitoring Unit.
//
// It collects the checker reports of all routers (parity, input buffer,
// routing computation and arbiter checkers, one bit per port) and PE fault
// reports from test programs, keeps the System Health Map up to date and
// decides what to do:
//
//   * Each report source is latched as pending. Once a source has been
//     handled it is masked, so a permanent fault that keeps firing is
//     processed only once.
//   * A report is turned into an SHM address and a bit mask:
//       parity error on input N/E/W/S -> the link arriving there is broken
//       parity error on the local input -> the PE is broken
//       buffer / routing checker on input d -> the two turns a packet
//           arriving on d can take (all eight for the local input)
//       arbiter checker on output o -> the two turns that end in o
//           (all eight for the local output)
//       PE report -> the PE is broken
//   * The SHM word is read; if the bits are already Broken the report is
//     ignored. Otherwise they are set.
//   * Impact: a broken PE on which no task of the current mapping runs
//     (checked by scanning the CMM) is ignored; any other new fault makes
//     the SHMU issue a Map-and-Deploy order to the MSU.
//   * After reset the SHMU first issues one Map-and-Deploy, which places
//     the application for the first time.
//   * Aging updates overwrite the PE's aging byte and issue no order.
//   * A predicted fault (from the SHMU database, outside this block) is
//     written into the SHM, a Map-and-Store order is issued, and after the
//     MSU is done the original SHM word is written back.
// Real faults are served before aging updates, and these before
// predictions. The unit handles one event at a time; an order occupies it
// until the MSU's done.
//
// Timing: an event is picked in the cycle after it is pending, the SHM read
// takes two cycles, the write one; a CMM scan takes NTASKS+1 cycles.
// ev_* outputs pulse once per outcome.
//
// What the SHMU does (collect, update SHM with Healthy/Broken, consult the
// CMM, ignore or order a mapping, the store-and-restore sequence for
// predicted faults) follows the design description. The report-to-SHM
// mapping, the impact rule and the priorities are this design's choices.
// Fault classification (transient / intermittent / permanent) and
// prediction are not built: the design leaves them open.
module shmu
  import ftnoc_pkg::*;
#(
  parameter int unsigned COLS   = 2,
  parameter int unsigned ROWS   = 2,
  parameter int unsigned NTASKS = 8,
  localparam int unsigned NT    = COLS * ROWS,
  localparam int unsigned PE_W  = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned TW    = (NTASKS > 1) ? $clog2(NTASKS) : 1,
  localparam int unsigned SAW   = $clog2(2 * NT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // fault reports
  input  chk_report_t [NT-1:0]    report,
  input  logic                    pe_fault_valid,
  input  logic [PE_W-1:0]         pe_fault_id,
  // aging updates
  input  logic                    aging_valid,
  output logic                    aging_ready,
  input  logic [PE_W-1:0]         aging_pe,
  input  logic [7:0]              aging_val,
  // predicted faults, as SHM address and bits to mark Broken
  input  logic                    predict_valid,
  output logic                    predict_ready,
  input  logic [SAW-1:0]          predict_addr,
  input  logic [WORD_W-1:0]       predict_mask,
  // SHM, read/write port
  output logic                    shm_en,
  output logic                    shm_we,
  output logic [SAW-1:0]          shm_addr,
  output logic [WORD_W-1:0]       shm_wdata,
  input  logic [WORD_W-1:0]       shm_rdata,
  // CMM, read port
  output logic                    cmm_en,
  output logic [TW-1:0]           cmm_addr,
  input  logic                    cmm_valid,
  input  logic [PE_W-1:0]         cmm_pe,
  // orders to the MSU
  output logic                    cmd_valid,
  input  logic                    cmd_ready,
  output msu_cmd_e                cmd,
  input  logic                    msu_done,
  // outcome pulses
  output logic                    ev_fault,
  output logic                    ev_ignored,
  output logic                    ev_deploy,
  output logic                    ev_store
);
  localparam int unsigned NK   = 4 * NPORTS + 1;   // sources per tile
  localparam int unsigned NSRC = NT * NK;
  localparam int unsigned CW   = (NTASKS > 1) ? $clog2(NTASKS + 1) : 1;

  typedef enum logic [1:0] {K_FAULT, K_PE, K_AGE, K_PRED} kind_e;
  typedef enum logic [3:0] {S_IDLE, S_RD, S_WAIT, S_EVAL, S_SCAN, S_ORDER,
                            S_WDONE, S_RESTORE} state_e;

  // SHM bit masks of the turns, in tile-word positions
  function automatic logic [WORD_W-1:0] turns(input logic [7:0] t);
    return WORD_W'(t) << TRN_LSB;
  endfunction

  localparam logic [7:0] TIN_N = (8'd1 << T_SE) | (8'd1 << T_SW);  // arriving on N, heading south
  localparam logic [7:0] TIN_S = (8'd1 << T_NE) | (8'd1 << T_NW);
  localparam logic [7:0] TIN_W = (8'd1 << T_EN) | (8'd1 << T_ES);
  localparam logic [7:0] TIN_E = (8'd1 << T_WN) | (8'd1 << T_WS);
  localparam logic [7:0] TOUT_N = (8'd1 << T_EN) | (8'd1 << T_WN);
  localparam logic [7:0] TOUT_E = (8'd1 << T_NE) | (8'd1 << T_SE);
  localparam logic [7:0] TOUT_W = (8'd1 << T_NW) | (8'd1 << T_SW);
  localparam logic [7:0] TOUT_S = (8'd1 << T_ES) | (8'd1 << T_WS);

  // ---------------- pending sources ----------------
  logic [NSRC-1:0] src_now, pending, handled;
  always_comb begin
    for (int r = 0; r < NT; r++)
      src_now[r*NK +: NK] = {pe_fault_valid && (int'(pe_fault_id) == r), report[r]};
  end

  logic              any_pend;
  logic [$clog2(NSRC)-1:0] pick;
  always_comb begin
    any_pend = 1'b0;
    pick     = '0;
    for (int i = NSRC - 1; i >= 0; i--)
      if (pending[i]) begin
        any_pend = 1'b1;
        pick     = ($clog2(NSRC))'(i);
      end
  end

  // Decode a source into an SHM address and mask.
  logic [SAW-1:0]    dec_addr;
  logic [WORD_W-1:0] dec_mask;
  logic              dec_pe;
  always_comb begin
    int r, k, d;
    r = int'(pick) / NK;
    k = int'(pick) % NK;
    d = k % NPORTS;
    dec_addr = SAW'(r);
    dec_mask = '0;
    dec_pe   = 1'b0;
    if (k == NK - 1) begin                         // PE report
      dec_mask[PE_BIT] = 1'b1;
      dec_pe = 1'b1;
    end else if (k >= 3 * NPORTS) begin            // parity error on input d
      case (d)
        P_N: begin dec_addr = SAW'(NT + r + COLS); dec_mask[P_S] = 1'b1; end
        P_S: begin dec_addr = SAW'(NT + r - COLS); dec_mask[P_N] = 1'b1; end
        P_E: begin dec_addr = SAW'(NT + r + 1);    dec_mask[P_W] = 1'b1; end
        P_W: begin dec_addr = SAW'(NT + r - 1);    dec_mask[P_E] = 1'b1; end
        default: begin dec_mask[PE_BIT] = 1'b1; dec_pe = 1'b1; end
      endcase
    end else if (k >= NPORTS) begin                // buffer or routing checker on input d
      case (d)
        P_N: dec_mask = turns(TIN_N);
        P_S: dec_mask = turns(TIN_S);
        P_E: dec_mask = turns(TIN_E);
        P_W: dec_mask = turns(TIN_W);
        default: dec_mask = turns(8'hFF);
      endcase
    end else begin                                 // arbiter of output d
      case (d)
        P_N: dec_mask = turns(TOUT_N);
        P_S: dec_mask = turns(TOUT_S);
        P_E: dec_mask = turns(TOUT_E);
        P_W: dec_mask = turns(TOUT_W);
        default: dec_mask = turns(8'hFF);
      endcase
    end
  end

  // ---------------- control ----------------
  state_e            state;
  kind_e             kind;
  logic [SAW-1:0]    addr_q;
  logic [WORD_W-1:0] mask_q, orig_q;
  logic [7:0]        age_q;
  logic [PE_W-1:0]   pe_q;
  msu_cmd_e          cmd_q;
  logic [CW-1:0]     cnt;
  logic              spend, found;
  logic              boot;

  assign aging_ready   = (state == S_IDLE) && !boot && !any_pend;
  assign predict_ready = (state == S_IDLE) && !boot && !any_pend && !aging_valid;
  assign cmd_valid     = (state == S_ORDER);
  assign cmd           = cmd_q;
  assign cmm_en        = (state == S_SCAN) && (cnt < CW'(NTASKS));
  assign cmm_addr      = TW'(cnt);

  logic [WORD_W-1:0] word_new;
  always_comb begin
    word_new = shm_rdata | mask_q;
    if (kind == K_AGE) begin
      word_new = shm_rdata;
      word_new[AGE_LSB +: 8] = age_q;
    end
  end

  logic already;
  assign already = ((shm_rdata & mask_q) == mask_q) && (kind inside {K_FAULT, K_PE});

  always_comb begin
    shm_en    = 1'b0;
    shm_we    = 1'b0;
    shm_addr  = addr_q;
    shm_wdata = word_new;
    case (state)
      S_RD:      shm_en = 1'b1;
      S_EVAL:    begin shm_en = !already; shm_we = !already; end
      S_RESTORE: begin shm_en = 1'b1; shm_we = 1'b1; shm_wdata = orig_q; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pending    <= '0;
      handled    <= '0;
      kind       <= K_FAULT;
      addr_q     <= '0;
      mask_q     <= '0;
      orig_q     <= '0;
      age_q      <= '0;
      pe_q       <= '0;
      cmd_q      <= CMD_MAP_DEPLOY;
      cnt        <= '0;
      spend      <= 1'b0;
      found      <= 1'b0;
      ev_fault   <= 1'b0;
      ev_ignored <= 1'b0;
      ev_deploy  <= 1'b0;
      ev_store   <= 1'b0;
      boot       <= 1'b1;
    end else begin
      ev_fault   <= 1'b0;
      ev_ignored <= 1'b0;
      ev_deploy  <= 1'b0;
      ev_store   <= 1'b0;
      pending    <= pending | (src_now & ~handled);

      case (state)
        S_IDLE: begin
          if (boot) begin                  // initial mapping after reset
            boot  <= 1'b0;
            kind  <= K_FAULT;
            cmd_q <= CMD_MAP_DEPLOY;
            state <= S_ORDER;
          end else if (any_pend) begin
            pending[pick] <= 1'b0;
            handled[pick] <= 1'b1;
            addr_q <= dec_addr;
            mask_q <= dec_mask;
            kind   <= dec_pe ? K_PE : K_FAULT;
            pe_q   <= PE_W'(int'(pick) / NK);
            state  <= S_RD;
          end else if (aging_valid) begin
            addr_q <= SAW'(aging_pe);
            mask_q <= '0;
            age_q  <= aging_val;
            kind   <= K_AGE;
            state  <= S_RD;
          end else if (predict_valid) begin
            addr_q <= predict_addr;
            mask_q <= predict_mask;
            kind   <= K_PRED;
            state  <= S_RD;
          end
        end

        S_RD:   state <= S_WAIT;
        S_WAIT: state <= S_EVAL;

        S_EVAL: begin
          orig_q <= shm_rdata;
          cnt    <= '0;
          spend  <= 1'b0;
          found  <= 1'b0;
          case (kind)
            K_AGE: state <= S_IDLE;
            K_PRED: begin
              cmd_q <= CMD_MAP_STORE;
              state <= S_ORDER;
            end
            default: begin
              if (already) begin
                ev_ignored <= 1'b1;
                state      <= S_IDLE;
              end else begin
                ev_fault <= 1'b1;
                cmd_q    <= CMD_MAP_DEPLOY;
                state    <= (kind == K_PE) ? S_SCAN : S_ORDER;
              end
            end
          endcase
        end

        S_SCAN: begin
          if (cnt < CW'(NTASKS)) cnt <= cnt + 1'b1;
          spend <= (cnt < CW'(NTASKS));
          if (spend && cmm_valid && (cmm_pe == pe_q)) found <= 1'b1;
          if (spend && (cnt == CW'(NTASKS))) begin
            if (found || (cmm_valid && (cmm_pe == pe_q))) state <= S_ORDER;
            else begin
              ev_ignored <= 1'b1;
              state      <= S_IDLE;
            end
          end
        end

        S_ORDER: begin
          if (cmd_ready) begin
            ev_deploy <= (cmd_q == CMD_MAP_DEPLOY);
            ev_store  <= (cmd_q == CMD_MAP_STORE);
            state     <= S_WDONE;
          end
        end

        S_WDONE: begin
          if (msu_done) state <= (kind == K_PRED) ? S_RESTORE : S_IDLE;
        end

        S_RESTORE: state <= S_IDLE;

        default: state <= S_IDLE;
      endcase
    end
  end

  // An order, once raised, is held until the MSU takes it.
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && !cmd_ready) |=> cmd_valid);

endmodule
