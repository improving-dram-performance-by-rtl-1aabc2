// darp_refresh_ctrl: DARP per-bank refresh scheduler for one rank.
//
// DARP (Dynamic Access Refresh Parallelization) lets the controller choose
// which bank a per-bank refresh (REFpb) goes to, instead of the DRAM's fixed
// round-robin order, and keeps each bank within LIMIT refreshes of its
// schedule with a refresh credit per bank (ref_credit_counter).
//
// 1. Schedule. Every T_REFI_PB cycles the next bank R in round-robin order is
//    due. If R has pending demand requests and its credit is above -LIMIT, the
//    refresh is postponed (credit - 1). Otherwise it is put in the refresh
//    queue and must be sent (credit unchanged).
// 2. Demand first. Outside the refresh queue, demand commands have priority.
// 3. Idle-bank refresh. In a cycle where the controller can issue no demand
//    command (demand_blocked), a bank with no pending demand requests, credit
//    below +LIMIT and able to take a REFpb now is chosen at random and
//    refreshed out of order; its credit rises by one (it either makes up a
//    postponed refresh or pulls one in).
// 4. Write-refresh parallelization (WARP). On entering writeback mode and then
//    every T_RFC_PB cycles in it, if the refresh queue is empty, the bank with
//    the fewest demand requests and credit below +LIMIT (warp_bank_select) is
//    put in the refresh queue and its credit rises by one at once. A WARP
//    pick also waits while a scheduled refresh is being queued or a refresh
//    is being issued in the same cycle, so no two credit changes of one bank
//    collide.
//
// The refresh queue holds at most one entry per bank. A queued refresh is
// offered ahead of demand requests (ref_req_queued = 1), and the controller
// should stop opening rows in a bank that has one queued (ref_pending).
// The random choice in step 3 starts a priority scan at a bank given by a
// 16-bit LFSR; the LFSR and the tie rules are this design's choices, as the
// algorithm only says "randomly selects one bank".
//
// Interface: ref_req_valid/bank/queued is combinational from the registered
// state and demand_blocked; the controller pulses ref_ack in the cycle it
// issues that REFpb. Events are one-cycle pulses for statistics.
module darp_refresh_ctrl #(
  parameter int BANKS     = 8,
  parameter int CW        = 8,
  parameter int T_REFI_PB = 325,
  parameter int T_RFC_PB  = 102,
  parameter int LIMIT     = 8,
  parameter logic [15:0] SEED = 16'hACE1,
  parameter int W         = $clog2(LIMIT + 1) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [CW-1:0]            demand_count [BANKS],
  input  logic                     wb_mode,
  input  logic                     demand_blocked,
  input  logic [BANKS-1:0]         bank_ref_ready,
  input  logic                     ref_ack,
  output logic                     ref_req_valid,
  output logic [$clog2(BANKS)-1:0] ref_req_bank,
  output logic                     ref_req_queued,
  output logic [BANKS-1:0]         ref_pending,
  output logic signed [W-1:0]      credit [BANKS],
  output logic                     ev_sched,     // scheduled REFpb queued
  output logic                     ev_postpone,
  output logic                     ev_idle,      // idle-bank REFpb issued
  output logic                     ev_warp       // WARP REFpb queued
);
  localparam int BB = $clog2(BANKS);
  localparam int TW = $clog2(T_REFI_PB + T_RFC_PB + 1);

  logic [TW-1:0]    refi_cnt, rfc_cnt;
  logic [BB-1:0]    rr_bank;
  logic [15:0]      lfsr;
  logic             wb_q;
  logic [BANKS-1:0] can_postpone, can_pull_in, postpone, pull_in;

  // ------------------------------------------------------------- credits
  for (genvar b = 0; b < BANKS; b++) begin : g_credit
    ref_credit_counter #(.LIMIT(LIMIT), .W(W)) u_credit (
      .clk, .rst_n,
      .postpone    (postpone[b]),
      .pull_in     (pull_in[b]),
      .credit      (credit[b]),
      .can_postpone(can_postpone[b]),
      .can_pull_in (can_pull_in[b])
    );
  end

  // ------------------------------------------------------------- schedule
  logic sched_tick, sched_busy, do_postpone, do_sched;
  assign sched_tick  = (refi_cnt == TW'(T_REFI_PB - 1));
  assign sched_busy  = (demand_count[rr_bank] != '0);
  assign do_postpone = sched_tick && (sched_busy || ref_pending[rr_bank]) &&
                       can_postpone[rr_bank];
  assign do_sched    = sched_tick && !do_postpone && !ref_pending[rr_bank];

  // ------------------------------------------------------------- WARP
  logic warp_tick, warp_valid, do_warp;
  logic [BB-1:0] warp_bank;
  assign warp_tick = wb_mode && (!wb_q || rfc_cnt == TW'(T_RFC_PB - 1));

  warp_bank_select #(.BANKS(BANKS), .CW(CW), .LIMIT(LIMIT), .W(W)) u_warp (
    .demand_count, .credit, .sel_valid(warp_valid), .sel_bank(warp_bank));

  assign do_warp = warp_tick && warp_valid && (ref_pending == '0) && !do_sched && !ref_ack;

  // ------------------------------------------------------------- queue
  logic          q_valid;
  logic [BB-1:0] q_bank;
  always_comb begin
    q_valid = 1'b0;
    q_bank  = '0;
    for (int i = BANKS - 1; i >= 0; i--) begin
      // prefer a queued bank that can be refreshed now
      if (ref_pending[i] && (!q_valid || bank_ref_ready[i])) begin
        q_valid = 1'b1;
        q_bank  = BB'(i);
      end
    end
  end

  // ------------------------------------------------------------- idle pick
  logic          idle_valid;
  logic [BB-1:0] idle_bank;
  always_comb begin
    idle_valid = 1'b0;
    idle_bank  = '0;
    for (int k = 0; k < BANKS; k++) begin
      logic [BB-1:0] b;
      b = BB'(lfsr[BB-1:0] + BB'(k));
      if (!idle_valid && demand_count[b] == '0 && can_pull_in[b] &&
          bank_ref_ready[b] && !ref_pending[b]) begin
        idle_valid = 1'b1;
        idle_bank  = b;
      end
    end
    idle_valid = idle_valid && demand_blocked && !q_valid;
  end

  assign ref_req_valid  = q_valid || idle_valid;
  assign ref_req_bank   = q_valid ? q_bank : idle_bank;
  assign ref_req_queued = q_valid;

  always_comb begin
    postpone = '0;
    pull_in  = '0;
    if (do_postpone) postpone[rr_bank] = 1'b1;
    if (do_warp) pull_in[warp_bank] = 1'b1;
    if (ref_ack && !q_valid) pull_in[idle_bank] = 1'b1;
  end

  // ------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      refi_cnt    <= '0;
      rfc_cnt     <= '0;
      rr_bank     <= '0;
      lfsr        <= SEED;
      wb_q        <= 1'b0;
      ref_pending <= '0;
      ev_sched    <= 1'b0;
      ev_postpone <= 1'b0;
      ev_idle     <= 1'b0;
      ev_warp     <= 1'b0;
    end else begin
      wb_q     <= wb_mode;
      lfsr     <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      refi_cnt <= sched_tick ? '0 : refi_cnt + 1'b1;
      if (sched_tick) rr_bank <= rr_bank + 1'b1;
      rfc_cnt  <= (!wb_mode || !wb_q || rfc_cnt == TW'(T_RFC_PB - 1)) ? '0 : rfc_cnt + 1'b1;
      if (ref_ack && q_valid) ref_pending[q_bank] <= 1'b0;
      if (do_sched) ref_pending[rr_bank] <= 1'b1;
      if (do_warp)  ref_pending[warp_bank] <= 1'b1;
      ev_sched    <= do_sched;
      ev_postpone <= do_postpone;
      ev_idle     <= ref_ack && !q_valid;
      ev_warp     <= do_warp;
    end
  end

  // A due refresh is never lost: the bank it names is either postponable or
  // free to be queued.
  a_no_lost_ref: assert property (@(posedge clk) disable iff (!rst_n)
    sched_tick |-> (do_postpone || do_sched));
  a_ack_has_req: assert property (@(posedge clk) disable iff (!rst_n)
    ref_ack |-> ref_req_valid);
  a_ack_ready: assert property (@(posedge clk) disable iff (!rst_n)
    ref_ack |-> bank_ref_ready[ref_req_bank]);
endmodule
