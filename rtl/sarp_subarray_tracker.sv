// sarp_subarray_tracker: the controller's shadow of each bank's refresh
// counters, used by SARP (Subarray Access Refresh Parallelization).
//
// Under SARP the DRAM refresh unit chooses the rows it refreshes; the
// controller only knows that a REFpb to bank b refreshes the next
// ROWS_PER_RF rows of that bank. To avoid sending an access to the subarray
// being refreshed it keeps copies of the DRAM's refresh-subarray and
// local-row counters for every bank and advances them exactly as the DRAM
// does: the local-row counter counts first and carries into the
// refresh-subarray counter. The number of subarrays comes from the module's
// SPD EEPROM at boot, here the cfg_sa_bits input (log2 of the subarray
// count, 0..SA_BITS_MAX); it must not change while refreshes are running.
// Both copies and the DRAM counters start at zero after reset.
//
// On ref_issue the subarray about to be refreshed in ref_bank is latched into
// ref_sa[ref_bank]; it stays valid for the whole refresh (ROWS_PER_RF divides
// the rows of a subarray, so one REFpb never crosses a subarray boundary).
// An access to bank b conflicts with the refresh while b is refreshing and
// the access's subarray equals ref_sa[b]; the controller makes that test.
module sarp_subarray_tracker
  import mc_pkg::*;
#(
  parameter int NB           = 8,
  parameter int NROWS        = 65536,
  parameter int ROWS_PER_RF  = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [2:0]                cfg_sa_bits,
  input  logic                      ref_issue,
  input  logic [$clog2(NB)-1:0]     ref_bank,
  output logic [SA_BITS_MAX-1:0]    ref_sa    [NB],
  output logic [$clog2(NROWS)-1:0]  local_row [NB]
);
  localparam int RW = $clog2(NROWS);

  logic [SA_BITS_MAX-1:0] sa_cnt [NB];
  logic [RW-1:0]          lr_cnt [NB];
  logic [RW:0]            lr_rows;        // rows per subarray

  assign lr_rows   = (RW+1)'(NROWS) >> cfg_sa_bits;
  assign local_row = lr_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) begin
        sa_cnt[b] <= '0;
        lr_cnt[b] <= '0;
        ref_sa[b] <= '0;
      end
    end else if (ref_issue) begin
      ref_sa[ref_bank] <= sa_cnt[ref_bank];
      if ((RW+1)'(lr_cnt[ref_bank]) + (RW+1)'(ROWS_PER_RF) >= lr_rows) begin
        lr_cnt[ref_bank] <= '0;
        sa_cnt[ref_bank] <= (sa_cnt[ref_bank] + 1'b1) &
                            SA_BITS_MAX'((1 << cfg_sa_bits) - 1);
      end else begin
        lr_cnt[ref_bank] <= lr_cnt[ref_bank] + RW'(ROWS_PER_RF);
      end
    end
  end
endmodule
