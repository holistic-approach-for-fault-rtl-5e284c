// cmm_mem: Current Mapping Memory, holding the mapping now deployed.
//
// One entry per task: {valid, pe}, the PE that task i runs on. The MSU
// writes it after each deployment (write port) and reads it to extract the
// partial mapping (read port A); the SHMU reads it (read port B) to judge
// whether a fault hits a PE that runs a task. Reads are synchronous (data
// in the cycle after the request). Reset marks every task unmapped, so the
// first deployment places all tasks.
//
// Its role follows the design description; entry format, port count and
// timing are this design's choices.
module cmm_mem #(
  parameter int unsigned NTASKS = 8,
  parameter int unsigned PE_W   = 2,
  localparam int unsigned TW = (NTASKS > 1) ? $clog2(NTASKS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [TW-1:0]   waddr,
  input  logic [PE_W-1:0] wdata,
  input  logic            a_en,
  input  logic [TW-1:0]   a_addr,
  output logic            a_valid,
  output logic [PE_W-1:0] a_pe,
  input  logic            b_en,
  input  logic [TW-1:0]   b_addr,
  output logic            b_valid,
  output logic [PE_W-1:0] b_pe
);
  logic [NTASKS-1:0]  vld;
  logic [PE_W-1:0]    pe [NTASKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld     <= '0;
      a_valid <= 1'b0;
      b_valid <= 1'b0;
      a_pe    <= '0;
      b_pe    <= '0;
      for (int i = 0; i < NTASKS; i++) pe[i] <= '0;
    end else begin
      if (a_en) begin
        a_valid <= (int'(a_addr) < NTASKS) ? vld[a_addr] : 1'b0;
        a_pe    <= (int'(a_addr) < NTASKS) ? pe[a_addr]  : '0;
      end
      if (b_en) begin
        b_valid <= (int'(b_addr) < NTASKS) ? vld[b_addr] : 1'b0;
        b_pe    <= (int'(b_addr) < NTASKS) ? pe[b_addr]  : '0;
      end
      if (we && (int'(waddr) < NTASKS)) begin
        vld[waddr] <= 1'b1;
        pe[waddr]  <= wdata;
      end
    end
  end

endmodule
