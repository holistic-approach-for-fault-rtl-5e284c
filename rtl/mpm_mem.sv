// mpm_mem: Most Probable Mapping memory.
//
// ENTRIES entries, each {valid, fault tag, mapping}, where the mapping is
// the list p_t0 .. p_t(m-1): the PE id chosen for each of NTASKS tasks.
// The fault tag identifies the fault configuration the mapping was
// computed for. One synchronous read/write port, used by the MSU: a read
// presented at edge t is valid in cycle t+1. Reset clears the valid bits;
// the tag and mapping storage is a plain array without reset.
//
// The entry structure (fault tag followed by one PE id per task) follows
// the design description; ENTRIES, the tag width and the port timing are
// this design's choices.
module mpm_mem
  import ftnoc_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned NTASKS  = 8,
  parameter int unsigned PE_W    = 2,
  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  input  logic                         we,
  input  logic [EW-1:0]                addr,
  input  logic [TAG_W-1:0]             wtag,
  input  logic [NTASKS-1:0][PE_W-1:0]  wmap,
  output logic                         rvalid,
  output logic [TAG_W-1:0]             rtag,
  output logic [NTASKS-1:0][PE_W-1:0]  rmap
);
  logic [ENTRIES-1:0]                vld;
  logic [TAG_W-1:0]                  tags [ENTRIES];
  logic [NTASKS-1:0][PE_W-1:0]       maps [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      rvalid <= 1'b0;
    end else if (en && (int'(addr) < ENTRIES)) begin
      if (we) vld[addr] <= 1'b1;
      else    rvalid    <= vld[addr];
    end
  end

  always_ff @(posedge clk) begin
    if (en && (int'(addr) < ENTRIES)) begin
      if (we) begin
        tags[addr] <= wtag;
        maps[addr] <= wmap;
      end else begin
        rtag <= tags[addr];
        rmap <= maps[addr];
      end
    end
  end

endmodule
