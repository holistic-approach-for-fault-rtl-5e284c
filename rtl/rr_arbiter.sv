// rr_arbiter: round-robin arbiter for one router output, with an online
// checker on its grant.
//
// N requesters; gnt is one-hot among the set req bits, combinational from
// req and the priority pointer. The pointer moves past the winner in the
// cycle a transfer completes (advance high), so a requester that keeps
// requesting is served again only after every other requester has had a
// turn.
//
// The checker, in the spirit of the design's arbitration-unit checkers,
// flags a cycle in which a grant goes to a port that did not request, more
// than one grant is high, or requests are pending and nothing is granted.
// err is registered (one cycle after the faulty cycle).
//
// fi_sa0 / fi_sa1 inject stuck-at faults on the grant lines (tie to zero in
// normal use). Round-robin order and the checker properties are this
// design's choices; the source only names the arbitration unit and states
// that checkers cover it.
module rr_arbiter #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  input  logic [N-1:0] fi_sa0,
  input  logic [N-1:0] fi_sa1,
  output logic         err
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr;       // highest-priority requester this cycle
  logic [N-1:0]  gnt_raw;
  logic [IW-1:0] win;

  always_comb begin
    gnt_raw = '0;
    win     = ptr;
    for (int k = N - 1; k >= 0; k--) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(ptr) + k) % N);
      if (req[idx]) begin
        gnt_raw = '0;
        gnt_raw[idx] = 1'b1;
        win = idx;
      end
    end
  end

  assign gnt = (gnt_raw & ~fi_sa0) | fi_sa1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && |gnt_raw)
      ptr <= (win == IW'(N - 1)) ? '0 : win + 1'b1;
  end

  // ---------------- checker ----------------
  logic chk_fail;
  always_comb begin
    chk_fail = 1'b0;
    if ((gnt & ~req) != '0)     chk_fail = 1'b1;
    if ((gnt & (gnt - 1'b1)) != '0)  chk_fail = 1'b1;  // more than one grant
    if ((req != '0) && (gnt == '0)) chk_fail = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err <= 1'b0;
    else        err <= chk_fail;
  end

endmodule
