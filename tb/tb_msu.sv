// Testbench of msu, with the SHM, MPM and CMM memories and a behavioural
// mapper. It checks the fault tag against a CRC worked out here, the
// Map-and-Deploy miss path (mapper called, all tasks deployed), the
// Map-and-Store path (mapping stored under the tag of the predicted
// fault), the Map-and-Deploy hit path (no mapper call, only the moved
// tasks deployed, CMM updated), and the exact cycle counts of both paths.
`include "tb_check.svh"
module tb_msu;
  import ftnoc_pkg::*;
  localparam int NT = 4, NTASKS = 8, ENTRIES = 8, PE_W = 2, MAP_LAT = 20;
  logic clk = 0, rst_n = 0;

  logic cmd_valid, cmd_ready, done, done_hit;
  msu_cmd_e cmd;
  logic [TAG_W-1:0] tag;
  logic shm_en; logic [2:0] shm_addr; logic [WORD_W-1:0] shm_rdata;
  logic a_en, a_we; logic [2:0] a_addr; logic [WORD_W-1:0] a_wdata, a_rdata;
  logic mpm_en, mpm_we, mpm_rvalid; logic [2:0] mpm_addr;
  logic [TAG_W-1:0] mpm_wtag, mpm_rtag;
  logic [NTASKS-1:0][PE_W-1:0] mpm_wmap, mpm_rmap;
  logic cmm_we, cmm_en, cmm_valid; logic [2:0] cmm_waddr, cmm_addr; logic [PE_W-1:0] cmm_wdata, cmm_pe;
  logic b_en, b_valid; logic [2:0] b_addr; logic [PE_W-1:0] b_pe;
  logic map_req_valid, map_rsp_valid;
  logic [TAG_W-1:0] map_req_tag;
  logic [NT-1:0] map_req_pe_broken;
  logic [NTASKS-1:0][PE_W-1:0] map_rsp_map;
  logic deploy_valid; logic [2:0] deploy_task; logic [PE_W-1:0] deploy_pe;
  logic [NTASKS-1:0][PE_W-1:0] map_out;
  int requests;
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] shm_model [2*NT];
  int deploys;
  int cur_map[NTASKS];

  msu #(.NT(NT), .NTASKS(NTASKS), .ENTRIES(ENTRIES)) dut (.*);
  shm #(.NT(NT)) u_shm (.clk, .rst_n, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                        .b_en(shm_en), .b_addr(shm_addr), .b_rdata(shm_rdata));
  mpm_mem #(.ENTRIES(ENTRIES), .NTASKS(NTASKS), .PE_W(PE_W)) u_mpm (.clk, .rst_n,
    .en(mpm_en), .we(mpm_we), .addr(mpm_addr), .wtag(mpm_wtag), .wmap(mpm_wmap),
    .rvalid(mpm_rvalid), .rtag(mpm_rtag), .rmap(mpm_rmap));
  cmm_mem #(.NTASKS(NTASKS), .PE_W(PE_W)) u_cmm (.clk, .rst_n, .we(cmm_we), .waddr(cmm_waddr),
    .wdata(cmm_wdata), .a_en(cmm_en), .a_addr(cmm_addr), .a_valid(cmm_valid), .a_pe(cmm_pe),
    .b_en, .b_addr, .b_valid, .b_pe);
  mapper_model #(.NT(NT), .NTASKS(NTASKS), .PE_W(PE_W), .MAP_LAT(MAP_LAT)) u_map (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && deploy_valid) begin
    deploys++;
    cur_map[deploy_task] = int'(deploy_pe);
  end

  // CRC-16/CCITT written out independently: shift register over the bit stream
  function automatic logic [15:0] ref_tag();
    logic [15:0] c;
    c = 16'hFFFF;
    for (int a = 0; a < 2 * NT; a++)
      for (int b = WORD_W - 1; b >= 0; b--) begin
        logic msb;
        msb = c[15];
        c = c << 1;
        if (msb != shm_model[a][b]) c = c ^ 16'h1021;
      end
    return c;
  endfunction

  task automatic shm_write(input int a, input logic [WORD_W-1:0] w);
    @(negedge clk);
    a_en = 1; a_we = 1; a_addr = 3'(a); a_wdata = w;
    @(negedge clk);
    a_en = 0; a_we = 0;
    shm_model[a] = w;
  endtask

  // issue an order, return the cycles from acceptance to done
  task automatic order(input msu_cmd_e c, output int cycles);
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc, req0;
    cmd_valid = 0; cmd = CMD_MAP_DEPLOY; a_en = 0; a_we = 0; a_addr = 0; a_wdata = 0;
    b_en = 0; b_addr = 0;
    for (int i = 0; i < 2 * NT; i++) shm_model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. initial deployment: MPM empty -> miss
    deploys = 0;
    order(CMD_MAP_DEPLOY, cyc);
    `CHECK(!done_hit, "first deploy misses")
    `CHECK(tag == ref_tag(), "fault tag of healthy system")
    `CHECK(requests == 1, "mapper asked once")
    `CHECK(deploys == NTASKS, "all tasks deployed at first")
    `CHECK(cyc == (2*NT+1) + (ENTRIES+1) + (MAP_LAT+1) + (NTASKS+1),
           $sformatf("miss latency %0d cycles", cyc))
    for (int t = 0; t < NTASKS; t++) `CHECK(cur_map[t] == t % NT, "initial mapping")
    for (int t = 0; t < NTASKS; t++) `CHECK(int'(map_out[t]) == t % NT, "map_out after boot")

    // 2. predicted fault: PE 2 broken, Map and Store, then SHM restored
    shm_write(2, 17'h1);
    order(CMD_MAP_STORE, cyc);
    `CHECK(requests == 2, "mapper asked for the predicted configuration")
    `CHECK(map_req_pe_broken == 4'b0100, "request names PE 2 broken")
    `CHECK(u_mpm.vld[0] && u_mpm.tags[0] == ref_tag(), "stored under the predicted tag")
    shm_write(2, 17'h0);

    // 3. deploy again for the healthy system: miss, but nothing changes
    deploys = 0;
    order(CMD_MAP_DEPLOY, cyc);
    `CHECK(!done_hit && deploys == 0, "same mapping: nothing deployed")

    // 4. the predicted fault happens: hit, no mapper call, partial deployment
    shm_write(2, 17'h1);
    deploys = 0; req0 = requests;
    order(CMD_MAP_DEPLOY, cyc);
    `CHECK(done_hit, "MPM hit")
    `CHECK(requests == req0, "no mapper call on a hit")
    `CHECK(cyc == (2*NT+1) + 2 + (NTASKS+1), $sformatf("hit latency %0d cycles", cyc))
    begin
      int moved;
      moved = 0;
      for (int t = 0; t < NTASKS; t++) begin
        int want;
        want = (t % 3 == 0) ? 0 : (t % 3 == 1) ? 1 : 3;   // healthy PEs 0,1,3
        if (want != t % NT) moved++;
        `CHECK(cur_map[t] == want, "mapping after hit")
      end
      `CHECK(deploys == moved, $sformatf("only moved tasks deployed (%0d of %0d)", deploys, moved))
      for (int t = 0; t < NTASKS; t++) `CHECK(int'(map_out[t]) == cur_map[t], "map_out holds the deployed mapping")
    end
    for (int t = 0; t < NTASKS; t++) begin
      @(negedge clk); b_en = 1; b_addr = 3'(t);
      @(negedge clk); b_en = 0;
      `CHECK(b_valid && int'(b_pe) == cur_map[t], "CMM holds the deployed mapping")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
