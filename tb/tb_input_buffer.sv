// Testbench of input_buffer: random writes and reads against a queue
// model (data order, ready/valid flags), then stuck-at faults on the
// control lines, each of which the checker must flag.
`include "tb_check.svh"
module tb_input_buffer;
  import ftnoc_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, rd_valid, rd_ready, err;
  flit_t wr_data, rd_data;
  logic [3:0] fi_sa0, fi_sa1;
  int checks = 0, failures = 0;
  flit_t q[$];
  int errs_seen;

  input_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = '0; fi_sa0 = '0; fi_sa1 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    errs_seen = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      wr_valid = ($urandom % 3) != 0;
      rd_ready = ($urandom % 2) != 0;
      wr_data  = flit_t'({$urandom, $urandom});
      `CHECK(wr_ready == (q.size() < DEPTH), "wr_ready vs model")
      `CHECK(rd_valid == (q.size() > 0), "rd_valid vs model")
      if (rd_valid && q.size() > 0) `CHECK(rd_data == q[0], "head data")
      @(posedge clk);
      if (rd_ready && q.size() > 0) void'(q.pop_front());
      if (wr_valid && wr_ready) q.push_back(wr_data);
      #1;
      if (err) errs_seen++;
    end
    `CHECK(errs_seen == 0, "no checker alarm in fault-free run")

    // Stuck-at faults: each must raise err within two cycles.
    for (int f = 0; f < 4; f++) begin
      for (int pol = 0; pol < 2; pol++) begin
        rst_n = 0; @(negedge clk); rst_n = 1; q.delete();
        wr_valid = 0; rd_ready = 0;
        // half-fill so that every line can be observed wrong
        @(negedge clk);
        wr_valid = 1; @(negedge clk); @(negedge clk); wr_valid = 0;
        errs_seen = 0;
        if (pol == 0) fi_sa0[f] = 1'b1; else fi_sa1[f] = 1'b1;
        for (int c = 0; c < 6; c++) begin
          wr_valid = (c % 2) == 0; rd_ready = (c % 3) == 0;
          @(negedge clk);
          if (err) errs_seen++;
        end
        fi_sa0 = '0; fi_sa1 = '0; wr_valid = 0; rd_ready = 0;
        // full SA0 is only visible when full, empty SA0 only when empty
        if (!((pol == 0) && (f <= 1)))
          `CHECK(errs_seen > 0, $sformatf("checker flags stuck-at-%0d on control line %0d", pol, f))
      end
    end
    // full stuck-at-0: fill the FIFO, then write once more
    rst_n = 0; @(negedge clk); rst_n = 1;
    wr_valid = 1; repeat (DEPTH) @(negedge clk);
    fi_sa0[1] = 1'b1; errs_seen = 0;
    repeat (3) begin @(negedge clk); if (err) errs_seen++; end
    fi_sa0 = '0; wr_valid = 0;
    `CHECK(errs_seen > 0, "checker flags stuck-at-0 on full")
    // empty stuck-at-0 on an empty FIFO
    rst_n = 0; @(negedge clk); rst_n = 1;
    fi_sa0[0] = 1'b1; errs_seen = 0;
    repeat (3) begin @(negedge clk); if (err) errs_seen++; end
    fi_sa0 = '0;
    `CHECK(errs_seen > 0, "checker flags stuck-at-0 on empty")

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
