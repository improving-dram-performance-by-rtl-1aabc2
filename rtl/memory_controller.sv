// memory_controller: one channel of the DSARP memory controller.
//
// Requests (a read or write of one 64 B line at rank/bank/row/column) enter a
// 64-entry read queue or a 64-entry write queue. Commands are scheduled
// FR-FCFS under a closed-row policy: each access is an ACT followed by a read
// or write with auto-precharge; column commands to an already open row are
// preferred, otherwise the oldest request whose ACT is legal goes first.
// Writes are drained in batches (writeback_mode_ctrl); reads are not served
// during a drain. The effective read/write mode only flips once no bank of the
// channel holds an open row, so an ACT already made is always followed by its
// column command.
//
// Refresh is per bank and scheduled by DARP in each rank
// (darp_refresh_ctrl): postponed while the due bank is busy, issued out of
// order to idle banks when no demand command can go, and overlapped with
// write drains (WARP). Queued refreshes have priority over demand commands;
// opportunistic idle-bank refreshes only take cycles no demand command can
// use. SARP lets a bank under refresh keep serving requests: the controller
// shadows the DRAM's refresh-subarray counters (sarp_subarray_tracker) and
// only holds back requests whose subarray is the one being refreshed, while
// rank_timing stretches tRRD/tFAW during refresh.
//
// Channel-level data-bus rules: tCCD between column commands, tRTW from a read
// to a write and tCWL + burst + tWTR from a write to a read. Rank-to-rank bus
// switching time is not modelled (not specified; this design's choice).
//
// Interface: req_valid/req_ready handshake (a request is taken in a cycle
// with both high); rd_resp_valid/rd_resp_id pulse T_CL + T_BURST cycles after
// the read command leaves the controller; wr_done pulses when the write
// command is sent. ddr_cmd is the registered DDR3-style command bus: one
// command per cycle, REFpb as REF with A10 = 0 and the bank on BA.
module memory_controller
  import mc_pkg::*;
#(
  parameter int T_REFI_PB_P = T_REFI_PB,
  parameter int T_RFC_PB_P  = T_RFC_PB,
  parameter int HIGH_WM_P   = HIGH_WM,
  parameter int LOW_WM_P    = LOW_WM,
  parameter int DEPTH_P     = RQ_DEPTH,
  parameter int T_FAW_P     = T_FAW,
  parameter int T_RRD_P     = T_RRD,
  // During a per-bank refresh tFAW and tRRD grow by 13.8 % (rounded up).
  parameter int T_FAW_SARP_P = (T_FAW_P * 1138 + 999) / 1000,
  parameter int T_RRD_SARP_P = (T_RRD_P * 1138 + 999) / 1000
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [2:0]             cfg_sa_bits,    // from the SPD: log2(subarrays)
  input  logic                   req_valid,
  input  logic                   req_write,
  input  mem_req_t               req,
  output logic                   req_ready,
  output logic                   rd_resp_valid,
  output logic [ID_BITS-1:0]     rd_resp_id,
  output logic                   wr_done_valid,
  output logic [ID_BITS-1:0]     wr_done_id,
  output ddr_cmd_t               ddr_cmd,
  output mc_events_t             events,
  output logic signed [4:0]      credit_out [RANKS][BANKS],
  output logic                   wb_mode_out
);
  localparam int QI = $clog2(DEPTH_P);
  localparam int QC = QI + 1;
  localparam int RD_LAT = T_CL + T_BURST;

  // ------------------------------------------------------------ queues
  mem_req_t        rq_e [DEPTH_P], wq_e [DEPTH_P], ae [DEPTH_P];
  logic [DEPTH_P-1:0] rq_v, wq_v, av;
  logic [QC-1:0]   rq_cnt, wq_cnt;
  logic [QC-1:0]   rq_bc [RANKS][BANKS], wq_bc [RANKS][BANKS];
  logic            rq_rdy, wq_rdy, rq_deq, wq_deq;
  logic [QI-1:0]   deq_idx;

  assign req_ready = req_write ? wq_rdy : rq_rdy;

  request_queue #(.DEPTH(DEPTH_P)) u_rq (
    .clk, .rst_n, .enq_valid(req_valid && !req_write), .enq_req(req), .enq_ready(rq_rdy),
    .deq_valid(rq_deq), .deq_idx, .entries(rq_e), .valid(rq_v), .count(rq_cnt),
    .bank_count(rq_bc));
  request_queue #(.DEPTH(DEPTH_P)) u_wq (
    .clk, .rst_n, .enq_valid(req_valid && req_write), .enq_req(req), .enq_ready(wq_rdy),
    .deq_valid(wq_deq), .deq_idx, .entries(wq_e), .valid(wq_v), .count(wq_cnt),
    .bank_count(wq_bc));

  logic wb_mode, wb_enter, sched_wr, switch_pending;
  writeback_mode_ctrl #(.CW(QC), .LOW_WM(LOW_WM_P), .HIGH_WM(HIGH_WM_P)) u_wb (
    .clk, .rst_n, .rq_count(rq_cnt), .wq_count(wq_cnt), .wb_mode, .wb_enter);
  assign wb_mode_out = wb_mode;

  // ------------------------------------------------------------ per rank
  logic [BANKS-1:0]       act_ok [RANKS], col_ok [RANKS], ref_ok [RANKS];
  logic [BANKS-1:0]       bopen [RANKS], brefr [RANKS], ref_pend [RANKS];
  logic [ROW_BITS-1:0]    orow [RANKS][BANKS];
  logic [SA_BITS_MAX-1:0] rsa [RANKS][BANKS];
  logic [ROW_BITS-1:0]    lrow [RANKS][BANKS];
  logic [RANKS-1:0]       rr_valid, rr_queued, rr_ack, rr_ready;
  logic [BANK_BITS-1:0]   rr_bank [RANKS];
  logic [RANKS-1:0]       ev_s, ev_p, ev_i, ev_w;
  logic                   demand_any;
  logic                   iss_act, iss_rd, iss_wr, iss_ref;
  logic [RANK_BITS-1:0]   iss_rank;
  logic [BANK_BITS-1:0]   iss_bank;
  logic [ROW_BITS-1:0]    iss_row;
  logic [COL_BITS-1:0]    iss_col;

  for (genvar r = 0; r < RANKS; r++) begin : g_rank
    logic [7:0] dcnt [BANKS];
    logic hit;
    always_comb begin
      for (int b = 0; b < BANKS; b++) dcnt[b] = 8'(rq_bc[r][b]) + 8'(wq_bc[r][b]);
    end
    assign hit = (int'(iss_rank) == r);

    rank_timing #(.NB(BANKS), .RW(ROW_BITS), .T_RCD(T_RCD), .T_RP(T_RP), .T_RAS(T_RAS),
      .T_RTP(T_RTP), .T_WREC(T_CWL + T_BURST + T_WR), .T_RRD(T_RRD_P), .T_FAW(T_FAW_P),
      .T_RRD_SARP(T_RRD_SARP_P), .T_FAW_SARP(T_FAW_SARP_P), .T_RFC_PB(T_RFC_PB_P)) u_tim (
      .clk, .rst_n,
      .iss_act(iss_act && hit), .iss_rd(iss_rd && hit), .iss_wr(iss_wr && hit),
      .iss_ref(iss_ref && hit), .iss_bank, .iss_row,
      .act_ok(act_ok[r]), .col_ok(col_ok[r]), .ref_ok(ref_ok[r]),
      .bank_open(bopen[r]), .open_row(orow[r]), .refreshing(brefr[r]));

    darp_refresh_ctrl #(.BANKS(BANKS), .CW(8), .T_REFI_PB(T_REFI_PB_P),
      .T_RFC_PB(T_RFC_PB_P), .LIMIT(REF_LIMIT), .W(5),
      .SEED(16'hACE1 ^ 16'(r * 16'h1357))) u_darp (
      .clk, .rst_n, .demand_count(dcnt), .wb_mode, .demand_blocked(!demand_any),
      .bank_ref_ready(ref_ok[r]), .ref_ack(rr_ack[r]),
      .ref_req_valid(rr_valid[r]), .ref_req_bank(rr_bank[r]), .ref_req_queued(rr_queued[r]),
      .ref_pending(ref_pend[r]), .credit(credit_out[r]),
      .ev_sched(ev_s[r]), .ev_postpone(ev_p[r]), .ev_idle(ev_i[r]), .ev_warp(ev_w[r]));

    sarp_subarray_tracker #(.NB(BANKS), .NROWS(ROWS_PER_BANK), .ROWS_PER_RF(ROWS_PER_REF)) u_sat (
      .clk, .rst_n, .cfg_sa_bits, .ref_issue(iss_ref && hit), .ref_bank(iss_bank),
      .ref_sa(rsa[r]), .local_row(lrow[r]));

    assign rr_ready[r] = rr_valid[r] && ref_ok[r][rr_bank[r]];
  end

  // ------------------------------------------------------------ data bus
  localparam int BW = 5;
  logic [BW-1:0] rd_wait, wr_wait;
  logic          rd_bus_ok, wr_bus_ok;
  assign rd_bus_ok = (rd_wait == '0);
  assign wr_bus_ok = (wr_wait == '0);

  // ------------------------------------------------------------ FR-FCFS pick
  logic any_open;
  always_comb begin
    any_open = 1'b0;
    for (int r = 0; r < RANKS; r++) any_open |= (bopen[r] != '0);
  end
  assign switch_pending = (wb_mode != sched_wr);
  assign ae = sched_wr ? wq_e : rq_e;
  assign av = sched_wr ? wq_v : rq_v;

  logic          col_found, act_found, sa_blocked;
  logic [QI-1:0] col_idx, act_idx;
  always_comb begin
    col_found = 1'b0; act_found = 1'b0; sa_blocked = 1'b0;
    col_idx = '0; act_idx = '0;
    for (int i = 0; i < DEPTH_P; i++) begin
      logic [RANK_BITS-1:0] r;
      logic [BANK_BITS-1:0] b;
      logic sa_hit;
      r = ae[i].rank;
      b = ae[i].bank;
      sa_hit = brefr[r][b] && (rsa[r][b] == row_subarray(ae[i].row, cfg_sa_bits));
      if (av[i] && !col_found && bopen[r][b] && orow[r][b] == ae[i].row && col_ok[r][b] &&
          (sched_wr ? wr_bus_ok : rd_bus_ok)) begin
        col_found = 1'b1;
        col_idx   = QI'(i);
      end
      if (av[i] && !switch_pending && act_ok[r][b] && !ref_pend[r][b]) begin
        if (sa_hit) sa_blocked = 1'b1;
        else if (!act_found) begin
          act_found = 1'b1;
          act_idx   = QI'(i);
        end
      end
    end
  end
  assign demand_any = col_found || act_found;

  // ------------------------------------------------------------ arbitration
  always_comb begin
    iss_act = 1'b0; iss_rd = 1'b0; iss_wr = 1'b0; iss_ref = 1'b0;
    iss_rank = '0; iss_bank = '0; iss_row = '0; iss_col = '0;
    rr_ack = '0; rq_deq = 1'b0; wq_deq = 1'b0; deq_idx = '0;
    for (int r = RANKS - 1; r >= 0; r--)
      if (rr_ready[r] && rr_queued[r]) begin
        iss_ref = 1'b1; iss_rank = RANK_BITS'(r); iss_bank = rr_bank[r];
      end
    if (!iss_ref && col_found) begin
      iss_rd = !sched_wr; iss_wr = sched_wr;
      iss_rank = ae[col_idx].rank; iss_bank = ae[col_idx].bank;
      iss_row = ae[col_idx].row;   iss_col = ae[col_idx].col;
      deq_idx = col_idx; rq_deq = !sched_wr; wq_deq = sched_wr;
    end else if (!iss_ref && act_found) begin
      iss_act = 1'b1;
      iss_rank = ae[act_idx].rank; iss_bank = ae[act_idx].bank; iss_row = ae[act_idx].row;
    end else if (!iss_ref) begin
      for (int r = RANKS - 1; r >= 0; r--)
        if (rr_ready[r] && !rr_queued[r]) begin
          iss_ref = 1'b1; iss_rank = RANK_BITS'(r); iss_bank = rr_bank[r];
        end
    end
    if (iss_ref) rr_ack[iss_rank] = 1'b1;
  end

  // ------------------------------------------------------------ state, outputs
  logic [RD_LAT-1:0]  rp_v;
  logic [ID_BITS-1:0] rp_id [RD_LAT];
  logic               sarp_act;
  assign sarp_act = iss_act && brefr[iss_rank][iss_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sched_wr <= 1'b0;
      rd_wait  <= '0;
      wr_wait  <= '0;
      ddr_cmd  <= ddr_nop();
      rp_v     <= '0;
      for (int i = 0; i < RD_LAT; i++) rp_id[i] <= '0;
      wr_done_valid <= 1'b0;
      wr_done_id    <= '0;
      events        <= '0;
    end else begin
      ddr_cmd_t c;
      if (switch_pending && !any_open) sched_wr <= wb_mode;
      if (rd_wait != '0) rd_wait <= rd_wait - 1'b1;
      if (wr_wait != '0) wr_wait <= wr_wait - 1'b1;
      if (iss_rd) begin
        rd_wait <= BW'(T_CCD - 1);
        if (wr_wait < BW'(T_RTW - 1)) wr_wait <= BW'(T_RTW - 1);
      end
      if (iss_wr) begin
        wr_wait <= BW'(T_CCD - 1);
        rd_wait <= BW'(T_CWL + T_BURST + T_WTR - 1);
      end
      // command bus
      c = ddr_nop();
      if (iss_act || iss_rd || iss_wr || iss_ref) begin
        c.cs_n[iss_rank] = 1'b0;
        c.ba = iss_bank;
      end
      if (iss_act) begin c.ras_n = 1'b0; c.a = iss_row; end
      if (iss_rd)  begin c.cas_n = 1'b0; c.a = ROW_BITS'(iss_col) | ROW_BITS'(1 << 10); end
      if (iss_wr)  begin c.cas_n = 1'b0; c.we_n = 1'b0; c.a = ROW_BITS'(iss_col) | ROW_BITS'(1 << 10); end
      if (iss_ref) begin c.ras_n = 1'b0; c.cas_n = 1'b0; c.a = '0; end
      ddr_cmd <= c;
      // responses
      rp_v <= {rp_v[RD_LAT-2:0], iss_rd};
      rp_id[0] <= ae[col_idx].id;
      for (int i = 1; i < RD_LAT; i++) rp_id[i] <= rp_id[i-1];
      wr_done_valid <= iss_wr;
      wr_done_id    <= ae[col_idx].id;
      // statistics
      events.ref_sched_issue <= |ev_s;
      events.ref_postpone    <= |ev_p;
      events.ref_idle_issue  <= |ev_i;
      events.ref_warp_issue  <= |ev_w;
      events.sarp_act        <= sarp_act;
      events.sarp_block      <= sa_blocked;
      events.wb_enter        <= wb_enter;
    end
  end
  assign rd_resp_valid = rp_v[RD_LAT-1];
  assign rd_resp_id    = rp_id[RD_LAT-1];

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({iss_act, iss_rd, iss_wr, iss_ref}));
  a_no_read_in_drain: assert property (@(posedge clk) disable iff (!rst_n)
    iss_rd |-> !sched_wr);
endmodule
