// dsarp_workload_run: one complete memory system (dsarp_system) in a given
// configuration, driven with random memory-intensive traffic and checked
// from the outside. Used by tb_dsarp_workloads to run several of the
// evaluated configurations side by side.
//
// Traffic: each channel offers a new request in 40 % of cycles, in phases of
// 2500 cycles that alternate read-heavy traffic focused on three banks,
// write-heavy traffic over all banks and light traffic, so that banks become
// busy and idle, write drains start, and refreshes meet demand requests.
// Request ids (256 per channel) are never reused while outstanding.
//
// Checks, every cycle:
//  - each read is answered and each write completed exactly once, and none is
//    left after the traffic stops;
//  - no ACT reaches a subarray under refresh, and at most one subarray of a
//    bank drives the global bitlines;
//  - the DRAM's per-bank refresh state matches the REFpb commands seen on the
//    bus (T_RFC_PB_P cycles, starting two edges after the bus);
//  - on every rank's bus: no two REFpb overlap; ACT-to-ACT spacing is at least
//    T_RRD_P, at least the stretched tRRD after a REFpb; four ACTs span at
//    least T_FAW_P, or the stretched tFAW while a bank of the rank refreshes;
//  - each bank's REFpb count stays within 8 (+1 for the one in flight) of
//    its nominal share, elapsed time / (8 x T_REFI_PB_P): the retention bound
//    kept by the refresh credits.
// Mechanism counts (postponed, idle-bank, WARP refreshes, held requests,
// accesses to a refreshing bank, write drains) are reported on outputs when
// done rises; the caller decides which must be non-zero.
module dsarp_workload_run
  import mc_pkg::*;
#(
  parameter int T_REFI_PB_P = T_REFI_PB,
  parameter int T_RFC_PB_P  = T_RFC_PB,
  parameter int NSA_P       = SUBARRAYS,
  parameter int T_FAW_P     = T_FAW,
  parameter int T_RRD_P     = T_RRD,
  parameter int CYCLES      = 20000
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_req,
  output int   e_post,
  output int   e_idle,
  output int   e_warp,
  output int   e_sched,
  output int   e_block,
  output int   e_ovl,
  output int   e_wb
);
  localparam int LRW  = $clog2(ROWS_PER_BANK / NSA_P);
  localparam int FAWS = (T_FAW_P * 1138 + 999) / 1000;
  localparam int RRDS = (T_RRD_P * 1138 + 999) / 1000;

  logic rst_n = 0;
  logic [2:0] cfg_sa_bits;
  logic [CHANNELS-1:0] req_valid, req_write, req_ready, rd_resp_valid, wr_done_valid;
  mem_req_t req [CHANNELS];
  logic [ID_BITS-1:0] rd_resp_id [CHANNELS], wr_done_id [CHANNELS];
  ddr_cmd_t ddr_cmd [CHANNELS];
  mc_events_t events [CHANNELS];
  logic wb_mode [CHANNELS];
  logic signed [4:0] credit [CHANNELS][RANKS][BANKS];
  logic [NSA_P-1:0] wl_en [CHANNELS][RANKS][BANKS], col_sel [CHANNELS][RANKS][BANKS];
  logic [NSA_P-1:0] to_gbl [CHANNELS][RANKS][BANKS];
  logic [LRW-1:0] row_addr [CHANNELS][RANKS][BANKS][NSA_P];
  logic [BANKS-1:0] ref_active [CHANNELS][RANKS], sa_conflict [CHANNELS][RANKS], ref_overlap [CHANNELS][RANKS];

  dsarp_system #(.T_REFI_PB_P(T_REFI_PB_P), .T_RFC_PB_P(T_RFC_PB_P), .NSA_P(NSA_P),
                 .T_FAW_P(T_FAW_P), .T_RRD_P(T_RRD_P)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d [rfc=%0d refi=%0d nsa=%0d faw=%0d] %s",
                                  cyc, T_RFC_PB_P, T_REFI_PB_P, NSA_P, T_FAW_P, what);
    end
  endtask

  bit out_rd [CHANNELS][256], out_wr [CHANNELS][256];
  bit stop_traffic = 0;
  int t_ref_end [CHANNELS][RANKS][BANKS];
  int n_ref [CHANNELS][RANKS][BANKS];
  int last_ref [CHANNELS][RANKS], last_act [CHANNELS][RANKS], last_was_ref [CHANNELS][RANKS];
  int acts [CHANNELS][RANKS][4];
  int t0;

  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < CHANNELS; c++) begin
      int phase, id;
      phase = (cyc / 2500 + c) % 4;
      req_valid[c] = 0;
      id = -1;
      for (int k = 0; k < 8 && id < 0; k++) begin
        int i;
        i = $urandom_range(0, 255);
        if (!out_rd[c][i] && !out_wr[c][i]) id = i;
      end
      if (!stop_traffic && id >= 0 && $urandom_range(0, 99) < (phase == 3 ? 10 : 40)) begin
        req_valid[c] = 1;
        req_write[c] = (phase == 1) ? ($urandom_range(0, 99) < 80) : ($urandom_range(0, 99) < 30);
        req[c].id   = ID_BITS'(id);
        req[c].rank = RANK_BITS'($urandom);
        req[c].bank = (phase == 0 || phase == 2) ? BANK_BITS'($urandom_range(0, 2)) : BANK_BITS'($urandom);
        req[c].row  = ROW_BITS'($urandom);
        req[c].col  = COL_BITS'($urandom);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < CHANNELS; c++) begin
      if (req_valid[c] && req_ready[c]) begin
        if (req_write[c]) out_wr[c][req[c].id] = 1; else out_rd[c][req[c].id] = 1;
        n_req++;
      end
      if (rd_resp_valid[c]) begin chk(out_rd[c][rd_resp_id[c]], "read response"); out_rd[c][rd_resp_id[c]] = 0; end
      if (wr_done_valid[c]) begin chk(out_wr[c][wr_done_id[c]], "write done"); out_wr[c][wr_done_id[c]] = 0; end
      e_post  += int'(events[c].ref_postpone);
      e_idle  += int'(events[c].ref_idle_issue);
      e_warp  += int'(events[c].ref_warp_issue);
      e_sched += int'(events[c].ref_sched_issue);
      e_block += int'(events[c].sarp_block);
      e_wb    += int'(events[c].wb_enter);
      for (int r = 0; r < RANKS; r++) begin
        bit is_act, is_ref;
        chk(sa_conflict[c][r] == '0, "access into a refreshing subarray");
        for (int b = 0; b < BANKS; b++) begin
          if (cyc > 4) chk(ref_active[c][r][b] == (cyc < t_ref_end[c][r][b] && cyc >= t_ref_end[c][r][b] - T_RFC_PB_P),
                           "DRAM refresh state");
          chk($onehot0(to_gbl[c][r][b]), "one subarray on the global bitlines");
          chk(credit[c][r][b] >= -8 && credit[c][r][b] <= 8, "credit range");
        end
        e_ovl += $countones(ref_overlap[c][r]);
        is_act = !ddr_cmd[c].cs_n[r] && !ddr_cmd[c].ras_n && ddr_cmd[c].cas_n && ddr_cmd[c].we_n;
        is_ref = !ddr_cmd[c].cs_n[r] && !ddr_cmd[c].ras_n && !ddr_cmd[c].cas_n && ddr_cmd[c].we_n;
        if (is_ref) begin
          chk(cyc - last_ref[c][r] >= T_RFC_PB_P, "overlapping REFpb in a rank");
          chk(cyc - last_act[c][r] >= T_RRD_P, "tRRD before REFpb");
          t_ref_end[c][r][ddr_cmd[c].ba] = cyc + 2 + T_RFC_PB_P;
          n_ref[c][r][ddr_cmd[c].ba]++;
          last_ref[c][r] = cyc;
          last_was_ref[c][r] = 1;
        end
        if (is_act) begin
          bit refr;
          refr = (cyc - last_ref[c][r] >= 1) && (cyc - last_ref[c][r] <= T_RFC_PB_P);
          chk(cyc - last_act[c][r] >= T_RRD_P, "tRRD");
          if (last_was_ref[c][r]) chk(cyc - last_ref[c][r] >= RRDS, "stretched tRRD after REFpb");
          chk(cyc - acts[c][r][0] >= (refr ? FAWS : T_FAW_P), "tFAW");
          acts[c][r][0] = acts[c][r][1]; acts[c][r][1] = acts[c][r][2];
          acts[c][r][2] = acts[c][r][3]; acts[c][r][3] = cyc;
          last_act[c][r] = cyc;
          last_was_ref[c][r] = 0;
        end
      end
    end
    // retention bound: every bank close to its nominal number of refreshes
    if (cyc % 1000 == 0) begin
      int nominal;
      nominal = (cyc - t0) / (BANKS * T_REFI_PB_P);
      for (int c = 0; c < CHANNELS; c++) for (int r = 0; r < RANKS; r++) for (int b = 0; b < BANKS; b++)
        chk(n_ref[c][r][b] >= nominal - 9 && n_ref[c][r][b] <= nominal + 9,
            $sformatf("bank %0d/%0d/%0d refreshes %0d, nominal %0d", c, r, b, n_ref[c][r][b], nominal));
    end
  end

  initial begin
    done = 0; checks = 0; failures = 0; n_req = 0;
    e_post = 0; e_idle = 0; e_warp = 0; e_sched = 0; e_block = 0; e_ovl = 0; e_wb = 0;
    req_valid = '0; req_write = '0;
    cfg_sa_bits = 3'($clog2(NSA_P));
    for (int c = 0; c < CHANNELS; c++) begin
      req[c] = '0;
      for (int i = 0; i < 256; i++) begin out_rd[c][i] = 0; out_wr[c][i] = 0; end
      for (int r = 0; r < RANKS; r++) begin
        last_ref[c][r] = -100000; last_act[c][r] = -100000; last_was_ref[c][r] = 0;
        for (int k = 0; k < 4; k++) acts[c][r][k] = -100000;
        for (int b = 0; b < BANKS; b++) begin t_ref_end[c][r][b] = 0; n_ref[c][r][b] = 0; end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    t0 = cyc;
    wait (cyc >= CYCLES);
    stop_traffic = 1;
    repeat (4000) @(posedge clk);
    begin
      int left;
      left = 0;
      for (int c = 0; c < CHANNELS; c++) for (int i = 0; i < 256; i++) left += out_rd[c][i] + out_wr[c][i];
      chk(left == 0, $sformatf("requests never completed: %0d", left));
    end
    done = 1;
  end
endmodule
