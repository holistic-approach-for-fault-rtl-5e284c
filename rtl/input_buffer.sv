// input_buffer: router input FIFO with a concurrent checker on its control part.
//
// A circular buffer of DEPTH flits with write and read pointers and an
// occupancy counter. wr_valid/wr_ready and rd_valid/rd_ready are
// valid/ready handshakes; a flit written in cycle t can be read from t+1.
// rd_data shows the head flit whenever rd_valid is high (first-word
// fall-through).
//
// The checker watches the control part, as the online checkers of the
// design do for input buffers: it flags a cycle in which the empty or full
// flag disagrees with the occupancy counter, both flags are high, or the
// pointer difference disagrees with the counter. err is registered, so it
// reports a fault one cycle after the cycle that showed it.
//
// fi_sa0 / fi_sa1 force stuck-at-0 / stuck-at-1 faults on the internal
// control lines {wr_en, rd_en, full, empty} (bit 3..0). They are fault
// injection hooks for tests and must be tied to zero in normal use. The
// FIFO structure and the checker properties are this design's own choices;
// the source states only that the input buffers are FIFOs whose control
// part is covered by checkers.
module input_buffer
  import ftnoc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  flit_t       wr_data,
  output logic        rd_valid,
  input  logic        rd_ready,
  output flit_t       rd_data,
  input  logic [3:0]  fi_sa0,
  input  logic [3:0]  fi_sa1,
  output logic        err
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t            mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;
  logic [PW:0]      count;
  logic             full_raw, empty_raw, full, empty;
  logic             wr_en_raw, rd_en_raw, wr_en, rd_en;

  assign full_raw  = (count == (PW+1)'(DEPTH));
  assign empty_raw = (count == '0);
  assign wr_en_raw = wr_valid && !full;
  assign rd_en_raw = rd_ready && !empty;

  assign full  = (full_raw  & ~fi_sa0[1]) | fi_sa1[1];
  assign empty = (empty_raw & ~fi_sa0[0]) | fi_sa1[0];
  assign wr_en = (wr_en_raw & ~fi_sa0[3]) | fi_sa1[3];
  assign rd_en = (rd_en_raw & ~fi_sa0[2]) | fi_sa1[2];

  assign wr_ready = !full;
  assign rd_valid = !empty;
  assign rd_data  = mem[rptr];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (wr_en) wptr <= inc(wptr);
      if (rd_en) rptr <= inc(rptr);
      count <= count + (PW+1)'(wr_en) - (PW+1)'(rd_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr] <= wr_data;
  end

  // ---------------- checker ----------------
  logic [PW:0] ptr_diff;
  logic        chk_fail;
  always_comb begin
    if (wptr >= rptr) ptr_diff = (PW+1)'(wptr) - (PW+1)'(rptr);
    else              ptr_diff = (PW+1)'(wptr) + (PW+1)'(DEPTH) - (PW+1)'(rptr);
    chk_fail = 1'b0;
    if (full && empty)                          chk_fail = 1'b1;
    if (empty != (count == '0))                 chk_fail = 1'b1;
    if (full  != (count == (PW+1)'(DEPTH)))     chk_fail = 1'b1;
    if (count > (PW+1)'(DEPTH))                 chk_fail = 1'b1;
    if ((count != (PW+1)'(DEPTH)) && (ptr_diff != count)) chk_fail = 1'b1;
    if ((count == (PW+1)'(DEPTH)) && (wptr != rptr))      chk_fail = 1'b1;
    if (wr_en && full)                          chk_fail = 1'b1;
    if (rd_en && empty)                         chk_fail = 1'b1;
    if (wr_en != (wr_valid && !full))           chk_fail = 1'b1;
    if (rd_en != (rd_ready && !empty))          chk_fail = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err <= 1'b0;
    else        err <= chk_fail;
  end

endmodule
