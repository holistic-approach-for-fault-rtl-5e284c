// shm: System Health Map, the dual-port memory shared by the SHMU and the MSU.
//
// It holds the abstract health of the system: for every tile one word
// {aging[7:0], turn_broken[7:0], pe_broken} (addresses 0..NT-1) and for
// every router one word of its four outgoing links N,E,W,S in bits [3:0]
// (addresses NT..2NT-1). Health bits are binary, 1 = Broken. The aging
// byte is the PE's frequency decrement due to aging. Field positions are
// defined in ftnoc_pkg.
//
// Port A belongs to the SHMU, which may read and write; port B belongs to
// the MSU, which may only read. Both reads are synchronous: data for the
// address presented with *_en at edge t is valid after edge t (in cycle
// t+1). A port-B read of an address that port A writes in the same cycle
// returns the old word. Reset clears the map, i.e. everything healthy.
//
// The contents (PE bit, eight turn bits per router, link bits, aging byte)
// follow the design description; the word layout, the address map and the
// read timing are this design's choices.
module shm
  import ftnoc_pkg::*;
#(
  parameter int unsigned NT = 4,
  localparam int unsigned DEPTH = 2 * NT,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              a_en,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  logic [WORD_W-1:0] a_wdata,
  output logic [WORD_W-1:0] a_rdata,
  input  logic              b_en,
  input  logic [AW-1:0]     b_addr,
  output logic [WORD_W-1:0] b_rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
      a_rdata <= '0;
      b_rdata <= '0;
    end else begin
      if (a_en && !a_we && (int'(a_addr) < DEPTH)) a_rdata <= mem[a_addr];
      if (b_en && (int'(b_addr) < DEPTH))          b_rdata <= mem[b_addr];
      if (a_en && a_we && (int'(a_addr) < DEPTH))  mem[a_addr] <= a_wdata;
    end
  end

endmodule
