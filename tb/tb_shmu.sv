// Testbench of shmu, with the SHM and CMM memories and a simple MSU
// stand-in that accepts an order and answers done a few cycles later. It
// checks, for each kind of report, the SHM bits the SHMU sets (worked out
// here from the tile/port geometry), the initial order after reset, whether it orders a remapping or
// ignores the fault, that a repeated report is processed once, the aging
// update, and the store-and-restore sequence for a predicted fault.
`include "tb_check.svh"
module tb_shmu;
  import ftnoc_pkg::*;
  localparam int COLS = 2, ROWS = 2, NT = 4, NTASKS = 8, PE_W = 2;
  logic clk = 0, rst_n = 0;
  chk_report_t [NT-1:0] report;
  logic pe_fault_valid; logic [PE_W-1:0] pe_fault_id;
  logic aging_valid, aging_ready; logic [PE_W-1:0] aging_pe; logic [7:0] aging_val;
  logic predict_valid, predict_ready; logic [2:0] predict_addr; logic [WORD_W-1:0] predict_mask;
  logic shm_en, shm_we; logic [2:0] shm_addr; logic [WORD_W-1:0] shm_wdata, shm_rdata;
  logic cmm_en, cmm_valid; logic [2:0] cmm_addr; logic [PE_W-1:0] cmm_pe;
  logic cmd_valid, cmd_ready, msu_done;
  msu_cmd_e cmd;
  logic ev_fault, ev_ignored, ev_deploy, ev_store;
  logic b_en; logic [2:0] b_addr; logic [WORD_W-1:0] b_rdata;
  logic cmm_we; logic [2:0] cmm_waddr; logic [PE_W-1:0] cmm_wdata;
  int checks = 0, failures = 0;
  int n_deploy = 0, n_store = 0, n_ignored = 0, n_fault = 0;
  logic [WORD_W-1:0] seen_during_store;

  shmu #(.COLS(COLS), .ROWS(ROWS), .NTASKS(NTASKS)) dut (.*);
  shm #(.NT(NT)) u_shm (.clk, .rst_n, .a_en(shm_en), .a_we(shm_we), .a_addr(shm_addr),
    .a_wdata(shm_wdata), .a_rdata(shm_rdata), .b_en, .b_addr, .b_rdata);
  cmm_mem #(.NTASKS(NTASKS), .PE_W(PE_W)) u_cmm (.clk, .rst_n, .we(cmm_we), .waddr(cmm_waddr),
    .wdata(cmm_wdata), .a_en(1'b0), .a_addr(3'd0), .a_valid(), .a_pe(),
    .b_en(cmm_en), .b_addr(cmm_addr), .b_valid(cmm_valid), .b_pe(cmm_pe));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // MSU stand-in: takes an order, done 5 cycles later; snoops SHM word 0
  int busy;
  assign cmd_ready = (busy == 0);
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin busy <= 0; msu_done <= 0; end
    else begin
      msu_done <= 0;
      if (busy == 0 && cmd_valid) busy <= 5;
      else if (busy > 1) busy <= busy - 1;
      else if (busy == 1) begin
        busy <= 0; msu_done <= 1;
        if (cmd == CMD_MAP_STORE) seen_during_store = u_shm.mem[0];
      end
    end

  always @(posedge clk) if (rst_n) begin
    if (ev_deploy) n_deploy++;
    if (ev_store) n_store++;
    if (ev_ignored) n_ignored++;
    if (ev_fault) n_fault++;
  end

  function automatic logic [WORD_W-1:0] tb_turns(input int a, b);
    return WORD_W'((1 << a) | (1 << b)) << 1;
  endfunction

  task automatic settle();
    repeat (40) @(negedge clk);
  endtask

  task automatic pulse_report(input int r, input int field, input int port);
    @(negedge clk);
    case (field)
      0: report[r].parity_err[port] = 1'b1;
      1: report[r].buf_err[port]    = 1'b1;
      2: report[r].rc_err[port]     = 1'b1;
      default: report[r].arb_err[port] = 1'b1;
    endcase
    @(negedge clk);
    report = '0;
    settle();
  endtask

  initial begin
    int d0;
    report = '0; pe_fault_valid = 0; pe_fault_id = 0; aging_valid = 0; aging_pe = 0; aging_val = 0;
    predict_valid = 0; predict_addr = 0; predict_mask = 0; b_en = 0; b_addr = 0;
    cmm_we = 0; cmm_waddr = 0; cmm_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    settle();
    `CHECK(n_deploy == 1, "initial Map-and-Deploy after reset")

    // parity error at router 1, input W: link router 0 -> E broken
    pulse_report(1, 0, P_W);
    `CHECK(u_shm.mem[NT + 0] == WORD_W'(1 << P_E), "link 0->E marked broken")
    `CHECK(n_deploy == 2 && n_fault == 1, "Map-and-Deploy ordered for link fault")

    // the same report again: masked, nothing happens
    pulse_report(1, 0, P_W);
    `CHECK(n_deploy == 2 && n_fault == 1 && n_ignored == 0, "repeated report processed once")

    // buffer checker at router 3, input S: turns NE and NW
    pulse_report(3, 1, P_S);
    `CHECK(u_shm.mem[3] == tb_turns(0, 1), "router 3 turns NE, NW broken")
    `CHECK(n_deploy == 3, "Map-and-Deploy ordered for turn fault")

    // routing checker at router 2, input N: turns SE and SW
    pulse_report(2, 2, P_N);
    `CHECK(u_shm.mem[2] == tb_turns(6, 7), "router 2 turns SE, SW broken")

    // arbiter checker at router 0, output E: turns NE and SE
    pulse_report(0, 3, P_E);
    `CHECK(u_shm.mem[0] == tb_turns(0, 6), "router 0 turns NE, SE broken")
    `CHECK(n_deploy == 5, "boot order plus four")

    // arbiter checker at router 0, output N (EN, WN) joins the earlier bits
    pulse_report(0, 3, P_N);
    `CHECK(u_shm.mem[0] == (tb_turns(0, 6) | tb_turns(2, 4)), "router 0 turns accumulate")

    // PE 2 faulty, no task on it: SHM updated, fault ignored
    @(negedge clk); pe_fault_valid = 1; pe_fault_id = 2; @(negedge clk); pe_fault_valid = 0;
    settle();
    `CHECK(u_shm.mem[2][PE_BIT] == 1'b1, "PE 2 broken in SHM")
    `CHECK(n_ignored == 1 && n_deploy == 6, "unused PE fault ignored")

    // task 5 runs on PE 1; PE 1 faulty -> order
    @(negedge clk); cmm_we = 1; cmm_waddr = 5; cmm_wdata = 1; @(negedge clk); cmm_we = 0;
    @(negedge clk); pe_fault_valid = 1; pe_fault_id = 1; @(negedge clk); pe_fault_valid = 0;
    settle();
    `CHECK(u_shm.mem[1][PE_BIT] == 1'b1 && n_deploy == 7, "PE hosting a task: Map-and-Deploy")

    // parity error on the local input of router 3: PE 3 broken (not used)
    pulse_report(3, 0, P_L);
    `CHECK(u_shm.mem[3][PE_BIT] == 1'b1 && n_ignored == 2, "local-port parity error marks the PE")

    // aging update
    d0 = n_deploy;
    @(negedge clk); aging_valid = 1; aging_pe = 3; aging_val = 8'h5A;
    @(posedge clk); while (!aging_ready) @(posedge clk);
    @(negedge clk); aging_valid = 0;
    settle();
    `CHECK(u_shm.mem[3][AGE_LSB +: 8] == 8'h5A && u_shm.mem[3][8:0] == (tb_turns(0,1) | 1),
           "aging byte written, health bits kept")
    `CHECK(n_deploy == d0, "aging issues no order")

    // predicted fault on PE 0: stored with the fault, then restored
    @(negedge clk); predict_valid = 1; predict_addr = 0; predict_mask = WORD_W'(1);
    @(posedge clk); while (!predict_ready) @(posedge clk);
    @(negedge clk); predict_valid = 0;
    settle();
    `CHECK(n_store == 1, "Map-and-Store ordered")
    `CHECK(seen_during_store[PE_BIT] == 1'b1, "SHM shows the predicted fault during the order")
    `CHECK(u_shm.mem[0] == (tb_turns(0, 6) | tb_turns(2, 4)), "SHM restored afterwards")
    `CHECK(n_deploy == d0, "prediction deploys nothing")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
