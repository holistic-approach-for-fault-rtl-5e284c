// Testbench of cmm_mem: every task unmapped after reset, then random
// writes and reads on both read ports against a model.
`include "tb_check.svh"
module tb_cmm_mem;
  localparam int NTASKS = 8, PE_W = 2;
  logic clk = 0, rst_n = 0;
  logic we, a_en, b_en, a_valid, b_valid;
  logic [2:0] waddr, a_addr, b_addr;
  logic [PE_W-1:0] wdata, a_pe, b_pe;
  bit mv[NTASKS];
  int mp[NTASKS];
  int checks = 0, failures = 0;

  cmm_mem #(.NTASKS(NTASKS), .PE_W(PE_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; a_en = 0; b_en = 0; waddr = 0; a_addr = 0; b_addr = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NTASKS; i++) begin
      a_en = 1; a_addr = 3'(i); b_en = 1; b_addr = 3'(i);
      @(negedge clk);
      `CHECK(!a_valid && !b_valid, "unmapped after reset")
    end
    for (int i = 0; i < 3000; i++) begin
      bit ev_a, ev_b; int ep_a, ep_b;
      we = $urandom % 2; waddr = 3'($urandom); wdata = PE_W'($urandom);
      a_en = $urandom % 2; a_addr = 3'($urandom);
      b_en = $urandom % 2; b_addr = 3'($urandom);
      ev_a = mv[a_addr]; ep_a = mp[a_addr]; ev_b = mv[b_addr]; ep_b = mp[b_addr];
      @(posedge clk);
      if (we) begin mv[waddr] = 1; mp[waddr] = int'(wdata); end
      @(negedge clk);
      if (a_en) `CHECK(a_valid == ev_a && (!ev_a || int'(a_pe) == ep_a), "read port A")
      if (b_en) `CHECK(b_valid == ev_b && (!ev_b || int'(b_pe) == ep_b), "read port B")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
