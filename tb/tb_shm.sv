// Testbench of shm: all words healthy after reset, then random writes on
// port A with random reads on both ports, compared with a model array,
// including the one-cycle read latency and read-old-data on a same-cycle
// write.
`include "tb_check.svh"
module tb_shm;
  import ftnoc_pkg::*;
  localparam int NT = 4, DEPTH = 2 * NT;
  logic clk = 0, rst_n = 0;
  logic a_en, a_we, b_en;
  logic [2:0] a_addr, b_addr;
  logic [WORD_W-1:0] a_wdata, a_rdata, b_rdata;
  logic [WORD_W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  shm #(.NT(NT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; a_we = 0; b_en = 0; a_addr = 0; b_addr = 0; a_wdata = 0;
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      b_en = 1; b_addr = 3'(i);
      @(negedge clk);
      `CHECK(b_rdata == '0, "healthy after reset")
    end
    for (int i = 0; i < 3000; i++) begin
      logic [WORD_W-1:0] ea, eb;
      bit ra, rb;
      a_en = $urandom % 2; a_we = $urandom % 2; a_addr = 3'($urandom); a_wdata = WORD_W'($urandom);
      b_en = $urandom % 2; b_addr = 3'($urandom);
      ra = a_en && !a_we; rb = b_en;
      ea = model[a_addr]; eb = model[b_addr];
      @(posedge clk);
      if (a_en && a_we) model[a_addr] = a_wdata;
      @(negedge clk);
      if (ra) `CHECK(a_rdata == ea, "port A read")
      if (rb) `CHECK(b_rdata == eb, "port B read (old data on collision)")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
