// rank_timing: DRAM timing state of one rank as seen by the controller.
//
// The controller uses a closed-row policy: every access is an ACT followed by
// a read or write with auto-precharge, so a bank is either closed, open for
// exactly one pending column command, or busy closing. Per bank the module
// keeps down-counters for tRCD (ACT to column command), for the earliest next
// ACT after the auto-precharge (max(tRAS, tRTP or write recovery) + tRP) and
// for a per-bank refresh in progress (tRFCpb). Per rank it enforces tRRD
// between ACT/REFpb commands, the four-activate window tFAW, and the rule that
// per-bank refreshes of one rank may not overlap.
//
// SARP: while any bank of the rank is refreshing, tRRD and tFAW are replaced
// by their stretched values T_RRD_SARP / T_FAW_SARP (+13.8 % for REFpb, from
// the power-overhead formula), which limits the activation current drawn in
// parallel with a refresh. A refreshing bank stays open to ACTs (act_ok); the
// controller must itself keep away from the refreshing subarray
// (sarp_subarray_tracker).
//
// Interface: issue strobes describe the command sent this cycle; the *_ok
// outputs say whether a command may be sent this cycle. tFAW is tracked with
// the ages of the last four ACTs, so the window length can change at once.
module rank_timing #(
  parameter int NB         = 8,
  parameter int RW         = 16,
  parameter int T_RCD      = 9,
  parameter int T_RP       = 9,
  parameter int T_RAS      = 24,
  parameter int T_RTP      = 5,
  parameter int T_WREC     = 7 + 4 + 10,   // tCWL + tBURST + tWR
  parameter int T_RRD      = 4,
  parameter int T_FAW      = 20,
  parameter int T_RRD_SARP = 5,
  parameter int T_FAW_SARP = 23,
  parameter int T_RFC_PB   = 102
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  iss_act,
  input  logic                  iss_rd,
  input  logic                  iss_wr,
  input  logic                  iss_ref,
  input  logic [$clog2(NB)-1:0] iss_bank,
  input  logic [RW-1:0]         iss_row,
  output logic [NB-1:0]         act_ok,
  output logic [NB-1:0]         col_ok,
  output logic [NB-1:0]         ref_ok,
  output logic [NB-1:0]         bank_open,
  output logic [RW-1:0]         open_row [NB],
  output logic [NB-1:0]         refreshing
);
  localparam int CWD = $clog2(T_RFC_PB + T_RAS + T_WREC + T_RP + 2);
  localparam int AW  = $clog2(T_FAW_SARP + T_FAW + 2);

  logic [CWD-1:0] rcd_cnt [NB];
  logic [CWD-1:0] ras_cnt [NB];
  logic [CWD-1:0] act_cnt [NB];
  logic [CWD-1:0] rfc_cnt [NB];
  logic [CWD-1:0] rrd_cnt;
  logic [AW-1:0]  act_age [4];
  logic [1:0]     faw_ptr;
  logic           any_ref, rrd_ok, faw_ok;
  logic [AW-1:0]  faw_win;

  assign any_ref = (refreshing != '0);
  assign faw_win = any_ref ? AW'(T_FAW_SARP) : AW'(T_FAW);
  assign rrd_ok  = (rrd_cnt == '0);
  assign faw_ok  = (act_age[faw_ptr] >= faw_win - 1'b1);   // age counts from 0 the cycle after an ACT

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      refreshing[b] = (rfc_cnt[b] != '0);
      act_ok[b] = !bank_open[b] && act_cnt[b] == '0 && rrd_ok && faw_ok;
      col_ok[b] = bank_open[b] && rcd_cnt[b] == '0;
      ref_ok[b] = !bank_open[b] && act_cnt[b] == '0 && !any_ref && rrd_ok;
    end
  end

  function automatic logic [CWD-1:0] mx(input logic [CWD-1:0] a, input logic [CWD-1:0] b);
    return (a > b) ? a : b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) begin
        rcd_cnt[b] <= '0; ras_cnt[b] <= '0; act_cnt[b] <= '0; rfc_cnt[b] <= '0;
        open_row[b] <= '0;
      end
      bank_open <= '0;
      rrd_cnt   <= '0;
      faw_ptr   <= '0;
      for (int i = 0; i < 4; i++) act_age[i] <= '1;
    end else begin
      for (int b = 0; b < NB; b++) begin
        if (rcd_cnt[b] != '0) rcd_cnt[b] <= rcd_cnt[b] - 1'b1;
        if (ras_cnt[b] != '0) ras_cnt[b] <= ras_cnt[b] - 1'b1;
        if (act_cnt[b] != '0) act_cnt[b] <= act_cnt[b] - 1'b1;
        if (rfc_cnt[b] != '0) rfc_cnt[b] <= rfc_cnt[b] - 1'b1;
      end
      for (int i = 0; i < 4; i++)
        if (act_age[i] != '1) act_age[i] <= act_age[i] + 1'b1;
      if (rrd_cnt != '0) rrd_cnt <= rrd_cnt - 1'b1;

      if (iss_act) begin
        bank_open[iss_bank] <= 1'b1;
        open_row[iss_bank]  <= iss_row;
        rcd_cnt[iss_bank]   <= CWD'(T_RCD - 1);
        ras_cnt[iss_bank]   <= CWD'(T_RAS - 1);
        rrd_cnt <= CWD'((any_ref ? T_RRD_SARP : T_RRD) - 1);
        act_age[faw_ptr] <= '0;
        faw_ptr <= faw_ptr + 1'b1;
      end
      if (iss_rd || iss_wr) begin
        // auto-precharge once tRAS and tRTP / write recovery allow, then tRP
        bank_open[iss_bank] <= 1'b0;
        act_cnt[iss_bank] <= mx(iss_rd ? CWD'(T_RTP) : CWD'(T_WREC), ras_cnt[iss_bank]) + CWD'(T_RP - 1);
      end
      if (iss_ref) begin
        rfc_cnt[iss_bank] <= CWD'(T_RFC_PB);
        rrd_cnt <= CWD'(T_RRD_SARP - 1);
      end
    end
  end

  a_act_legal: assert property (@(posedge clk) disable iff (!rst_n)
    iss_act |-> (!bank_open[iss_bank] && rrd_ok && faw_ok));
  a_col_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (iss_rd || iss_wr) |-> col_ok[iss_bank]);
  a_ref_legal: assert property (@(posedge clk) disable iff (!rst_n)
    iss_ref |-> ref_ok[iss_bank]);
endmodule
