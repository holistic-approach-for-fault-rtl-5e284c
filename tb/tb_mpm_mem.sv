// Testbench of mpm_mem: no valid entry after reset, then random writes of
// {tag, mapping} and reads against a model.
`include "tb_check.svh"
module tb_mpm_mem;
  import ftnoc_pkg::*;
  localparam int ENTRIES = 8, NTASKS = 8, PE_W = 2;
  logic clk = 0, rst_n = 0;
  logic en, we, rvalid;
  logic [2:0] addr;
  logic [TAG_W-1:0] wtag, rtag;
  logic [NTASKS-1:0][PE_W-1:0] wmap, rmap;
  bit mv[ENTRIES];
  logic [TAG_W-1:0] mt[ENTRIES];
  logic [NTASKS-1:0][PE_W-1:0] mm[ENTRIES];
  int checks = 0, failures = 0;

  mpm_mem #(.ENTRIES(ENTRIES), .NTASKS(NTASKS), .PE_W(PE_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wtag = 0; wmap = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < ENTRIES; i++) begin
      en = 1; we = 0; addr = 3'(i);
      @(negedge clk);
      `CHECK(!rvalid, "empty after reset")
    end
    for (int i = 0; i < 3000; i++) begin
      bit rd; int a;
      en = $urandom % 4 != 0; we = $urandom % 3 == 0; addr = 3'($urandom);
      wtag = TAG_W'($urandom); wmap = (NTASKS*PE_W)'($urandom);
      rd = en && !we; a = addr;
      @(posedge clk);
      if (en && we) begin mv[addr] = 1; mt[addr] = wtag; mm[addr] = wmap; end
      @(negedge clk);
      if (rd) begin
        `CHECK(rvalid == mv[a], "valid bit")
        if (mv[a]) `CHECK(rtag == mt[a] && rmap == mm[a], "tag and mapping")
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
