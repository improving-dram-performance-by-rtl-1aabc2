// tb_dsarp_workloads: the whole memory system in the configurations that the
// sensitivity studies of DSARP vary, each run end to end with random
// memory-intensive traffic by dsarp_workload_run (see that file for the
// traffic and the checks):
//   0  16 Gb chips:  tRFCpb = 530 ns / 2.3 = 154 cycles
//   1  32 Gb chips:  tRFCpb = 890 ns / 2.3 = 258 cycles
//   2  32 Gb chips with 64 ms retention: tREFIpb = 7.8 us / 8 = 650 cycles
//   3  32 Gb, tFAW/tRRD = 5/1 cycles   (stretched 6/2 during refresh)
//   4  32 Gb, tFAW/tRRD = 30/6 cycles  (stretched 35/7)
//   5  32 Gb, 2 subarrays per bank
//   6  32 Gb, 64 subarrays per bank
// The default configuration (8 Gb, 32 ms, 8 subarrays, 20/4) is run by
// tb_dsarp_system. All seven systems share one clock and run 30000 cycles of
// traffic plus a drain. Every configuration must complete all requests, pass
// all protocol checks and show postponed, scheduled, idle-bank and WARP
// refreshes, write drains and accesses to a bank under refresh; requests held
// back by the refreshing subarray are required wherever the bank has few
// enough subarrays for it to be likely (all but the 64-subarray case).
module tb_dsarp_workloads;
  localparam int N = 7;
  localparam int CYCLES = 30000;
  logic clk = 0;
  always #5 clk = ~clk;

  logic done [N];
  int ck [N], fl [N], nr [N], ep [N], ei [N], ew [N], es [N], eb [N], eo [N], ewb [N];

  dsarp_workload_run #(.T_RFC_PB_P(154), .CYCLES(CYCLES)) w0 (
    .clk, .done(done[0]), .checks(ck[0]), .failures(fl[0]), .n_req(nr[0]), .e_post(ep[0]), .e_idle(ei[0]),
    .e_warp(ew[0]), .e_sched(es[0]), .e_block(eb[0]), .e_ovl(eo[0]), .e_wb(ewb[0]));
  dsarp_workload_run #(.T_RFC_PB_P(258), .CYCLES(CYCLES)) w1 (
    .clk, .done(done[1]), .checks(ck[1]), .failures(fl[1]), .n_req(nr[1]), .e_post(ep[1]), .e_idle(ei[1]),
    .e_warp(ew[1]), .e_sched(es[1]), .e_block(eb[1]), .e_ovl(eo[1]), .e_wb(ewb[1]));
  dsarp_workload_run #(.T_RFC_PB_P(258), .T_REFI_PB_P(650), .CYCLES(CYCLES)) w2 (
    .clk, .done(done[2]), .checks(ck[2]), .failures(fl[2]), .n_req(nr[2]), .e_post(ep[2]), .e_idle(ei[2]),
    .e_warp(ew[2]), .e_sched(es[2]), .e_block(eb[2]), .e_ovl(eo[2]), .e_wb(ewb[2]));
  dsarp_workload_run #(.T_RFC_PB_P(258), .T_FAW_P(5), .T_RRD_P(1), .CYCLES(CYCLES)) w3 (
    .clk, .done(done[3]), .checks(ck[3]), .failures(fl[3]), .n_req(nr[3]), .e_post(ep[3]), .e_idle(ei[3]),
    .e_warp(ew[3]), .e_sched(es[3]), .e_block(eb[3]), .e_ovl(eo[3]), .e_wb(ewb[3]));
  dsarp_workload_run #(.T_RFC_PB_P(258), .T_FAW_P(30), .T_RRD_P(6), .CYCLES(CYCLES)) w4 (
    .clk, .done(done[4]), .checks(ck[4]), .failures(fl[4]), .n_req(nr[4]), .e_post(ep[4]), .e_idle(ei[4]),
    .e_warp(ew[4]), .e_sched(es[4]), .e_block(eb[4]), .e_ovl(eo[4]), .e_wb(ewb[4]));
  dsarp_workload_run #(.T_RFC_PB_P(258), .NSA_P(2), .CYCLES(CYCLES)) w5 (
    .clk, .done(done[5]), .checks(ck[5]), .failures(fl[5]), .n_req(nr[5]), .e_post(ep[5]), .e_idle(ei[5]),
    .e_warp(ew[5]), .e_sched(es[5]), .e_block(eb[5]), .e_ovl(eo[5]), .e_wb(ewb[5]));
  dsarp_workload_run #(.T_RFC_PB_P(258), .NSA_P(64), .CYCLES(CYCLES)) w6 (
    .clk, .done(done[6]), .checks(ck[6]), .failures(fl[6]), .n_req(nr[6]), .e_post(ep[6]), .e_idle(ei[6]),
    .e_warp(ew[6]), .e_sched(es[6]), .e_block(eb[6]), .e_ovl(eo[6]), .e_wb(ewb[6]));

  int checks = 0, failures = 0;

  task automatic need(input int i, input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL config %0d: %s never happened", i, what); end
  endtask

  initial begin
    repeat (3 * CYCLES) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    do begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < N; i++) all &= done[i];
    end while (!all);
    for (int i = 0; i < N; i++) begin
      $display("config %0d: requests=%0d sched=%0d postponed=%0d idle=%0d warp=%0d held=%0d overlap_cycles=%0d drains=%0d checks=%0d failures=%0d",
               i, nr[i], es[i], ep[i], ei[i], ew[i], eb[i], eo[i], ewb[i], ck[i], fl[i]);
      checks += ck[i];
      failures += fl[i];
      need(i, es[i] > 0, "scheduled refresh");
      need(i, ep[i] > 0, "postponed refresh");
      need(i, ei[i] > 0, "idle-bank refresh");
      need(i, ew[i] > 0, "write-refresh parallelization");
      need(i, ewb[i] > 0, "writeback mode");
      need(i, eo[i] > 0, "access in a refreshing bank");
      if (i != 6) need(i, eb[i] > 0, "request held by the refreshing subarray");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
