// warp_bank_select: bank choice of write-refresh parallelization (WARP).
//
// In writeback mode DARP preempts one bank's writes with a per-bank refresh so
// that the refresh overlaps the writes drained to the other banks. The bank
// chosen is the one with the fewest pending demand requests (reads plus
// writes) among those whose refresh credit is below the pull-in limit. Ties go
// to the lowest bank number (this design's choice). Purely combinational.
module warp_bank_select #(
  parameter int BANKS = 8,
  parameter int CW    = 8,
  parameter int LIMIT = 8,
  parameter int W     = $clog2(LIMIT + 1) + 1
) (
  input  logic [CW-1:0]        demand_count [BANKS],
  input  logic signed [W-1:0]  credit       [BANKS],
  output logic                 sel_valid,
  output logic [$clog2(BANKS)-1:0] sel_bank
);
  always_comb begin
    logic [CW-1:0] best;
    sel_valid = 1'b0;
    sel_bank  = '0;
    best      = '1;
    for (int b = 0; b < BANKS; b++) begin
      if (credit[b] < W'(LIMIT) && (!sel_valid || demand_count[b] < best)) begin
        sel_valid = 1'b1;
        sel_bank  = ($clog2(BANKS))'(b);
        best      = demand_count[b];
      end
    end
  end
endmodule
