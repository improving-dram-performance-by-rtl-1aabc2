// dram_refresh_unit: the refresh logic of one DRAM rank, modified for DARP
// and SARP.
//
// A per-bank refresh command names its bank (DARP), so the unit no longer
// keeps one round-robin bank counter; instead every bank has its own refresh
// row counter, because banks receive different numbers of postponed and
// pulled-in refreshes. For SARP each bank's row counter is split into a
// refresh-subarray counter and a local-row counter, which give the subarray
// and the row inside it directly, without the bank's global row decoder.
//
// A REFpb refreshes ROWS_PER_RF consecutive rows of the bank (8: 64K rows
// need 8192 refreshes per bank per retention window). The refresh lasts
// T_RFC_PB cycles; ref_active (the REF? signal of the bank) is high that long.
// Rows are stepped evenly: each gets T_RFC_PB / ROWS_PER_RF cycles. The
// local-row counter counts first and carries into the refresh-subarray
// counter; this order, and the even stepping, are this design's choices.
// Counters reset to zero; the controller's shadow copies do the same.
//
// A REFpb for a bank still refreshing is a protocol error (assertion).
module dram_refresh_unit #(
  parameter int NB          = 8,
  parameter int NSA         = 8,
  parameter int NROWS       = 65536,
  parameter int ROWS_PER_RF = 8,
  parameter int T_RFC_PB    = 102
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   refpb,
  input  logic [$clog2(NB)-1:0]  refpb_bank,
  output logic [NB-1:0]          ref_active,
  output logic [$clog2(NSA)-1:0] ref_sa  [NB],
  output logic [$clog2(NROWS/NSA)-1:0] ref_row [NB]
);
  localparam int LRW   = $clog2(NROWS / NSA);
  localparam int ROW_T = T_RFC_PB / ROWS_PER_RF;
  localparam int TW    = $clog2(T_RFC_PB + 1);
  localparam int KW    = $clog2(ROWS_PER_RF + 1);

  logic [TW-1:0] busy  [NB];
  logic [TW-1:0] step  [NB];
  logic [KW-1:0] left  [NB];

  always_comb for (int b = 0; b < NB; b++) ref_active[b] = (busy[b] != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) begin
        busy[b] <= '0; step[b] <= '0; left[b] <= '0;
        ref_sa[b] <= '0; ref_row[b] <= '0;
      end
    end else begin
      for (int b = 0; b < NB; b++) begin
        if (refpb && int'(refpb_bank) == b) begin
          busy[b] <= TW'(T_RFC_PB);
          step[b] <= TW'(ROW_T - 1);
          left[b] <= KW'(ROWS_PER_RF);
        end else if (busy[b] != '0) begin
          busy[b] <= busy[b] - 1'b1;
          if (step[b] != '0) step[b] <= step[b] - 1'b1;
          else if (left[b] != '0) begin
            // one row done: advance local row, carry into the subarray
            step[b] <= TW'(ROW_T - 1);
            left[b] <= left[b] - 1'b1;
            ref_row[b] <= ref_row[b] + 1'b1;
            if (ref_row[b] == LRW'(NROWS / NSA - 1)) ref_sa[b] <= ref_sa[b] + 1'b1;
          end
        end
      end
    end
  end

  a_no_overlap_same_bank: assert property (@(posedge clk) disable iff (!rst_n)
    refpb |-> !ref_active[refpb_bank]);
  a_rows_fit: assert property (@(posedge clk) disable iff (!rst_n)
    (busy[0] == TW'(1)) |-> (left[0] == '0 || left[0] == KW'(1)));
endmodule
