// ref_credit_counter: the per-bank refresh credit of DARP.
//
// JEDEC DDR allows up to eight refreshes to be postponed or pulled in, so a
// bank may run up to LIMIT refreshes behind or ahead of its schedule. The
// credit counts this: it decrements when a scheduled per-bank refresh is
// postponed and increments when a refresh is issued ahead of schedule (pulled
// in, or making up a postponed one). It saturates at -LIMIT and +LIMIT.
// can_postpone is high while the credit is above -LIMIT; can_pull_in while it
// is below +LIMIT.
//
// The credit range -8..+8 has 17 values and so is held in 5 bits. The text
// quotes 4 bits per bank, which covers only 16 values; this design keeps the
// full range of the algorithm. A postpone and a pull-in in the same cycle
// cancel. The counter is updated at the clock edge after the request.
module ref_credit_counter #(
  parameter int LIMIT = 8,
  parameter int W     = $clog2(LIMIT + 1) + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                postpone,
  input  logic                pull_in,
  output logic signed [W-1:0] credit,
  output logic                can_postpone,
  output logic                can_pull_in
);
  assign can_postpone = (credit > -W'(LIMIT));
  assign can_pull_in  = (credit <  W'(LIMIT));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credit <= '0;
    else if (postpone && !pull_in && can_postpone) credit <= credit - 1'b1;
    else if (pull_in && !postpone && can_pull_in)  credit <= credit + 1'b1;
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    (postpone && !pull_in) |-> can_postpone);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (pull_in && !postpone) |-> can_pull_in);
endmodule
