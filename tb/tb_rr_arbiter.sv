// Testbench of rr_arbiter: random requests against a round-robin
// reference model (exact grant every cycle), then stuck-at faults on the
// grant lines, which the checker must flag.
`include "tb_check.svh"
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, gnt, fi_sa0, fi_sa1, exp_gnt;
  logic advance, err;
  int checks = 0, failures = 0;
  int ptr, errs;

  rr_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] model(input logic [N-1:0] r, input int p);
    for (int k = 0; k < N; k++)
      if (r[(p + k) % N]) return N'(1) << ((p + k) % N);
    return '0;
  endfunction

  initial begin
    req = '0; advance = 0; fi_sa0 = '0; fi_sa1 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ptr = 0; errs = 0;
    for (int i = 0; i < 3000; i++) begin
      req = N'($urandom);
      advance = ($urandom % 4) != 0;
      #1;
      exp_gnt = model(req, ptr);
      `CHECK(gnt == exp_gnt, $sformatf("grant %b for req %b ptr %0d, expected %b", gnt, req, ptr, exp_gnt))
      @(posedge clk);
      if (advance && exp_gnt != 0)
        for (int k = 0; k < N; k++) if (exp_gnt[k]) ptr = (k + 1) % N;
      @(negedge clk);
      if (err) errs++;
    end
    `CHECK(errs == 0, "no checker alarm in fault-free run")

    // A requester that keeps asking must be served within N grants.
    req = '1; advance = 1;
    begin
      logic [N-1:0] served;
      served = '0;
      for (int i = 0; i < N; i++) begin #1; served |= gnt; @(negedge clk); end
      `CHECK(served == '1, "every requester served within N cycles")
    end

    for (int b = 0; b < N; b++) begin
      for (int pol = 0; pol < 2; pol++) begin
        errs = 0;
        if (pol == 0) fi_sa0[b] = 1; else fi_sa1[b] = 1;
        for (int c = 0; c < 8; c++) begin
          req = (pol == 0) ? (N'(1) << b) : (N'(1) << ((b + 1) % N));
          @(negedge clk);
          if (err) errs++;
        end
        fi_sa0 = '0; fi_sa1 = '0;
        `CHECK(errs > 0, $sformatf("checker flags stuck-at-%0d on grant %0d", pol, b))
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
