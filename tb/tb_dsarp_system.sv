// tb_dsarp_system: the whole memory system at its default size and timing
// (2 channels x 2 ranks x 8 banks x 8 subarrays, DDR3-1333, tREFIpb = 325
// cycles, tRFCpb = 102 cycles), run end to end with random traffic on both
// channels. Every read must be answered and every write completed exactly
// once. On the DRAM side no access may ever raise a row in a subarray that is
// being refreshed, and the refresh state the DRAM reports must agree with the
// refreshes seen on each command bus. Each mechanism must occur at least
// once: postponed, scheduled, idle-bank (out-of-order) and write-parallel
// (WARP) refreshes, write drains, accesses held back by a refreshing
// subarray, and rows accessed in a bank while another of its subarrays is
// being refreshed.
module tb_dsarp_system;
  import mc_pkg::*;
  localparam int CYCLES = 30000;
  localparam int LRW = $clog2(ROWS_PER_BANK / SUBARRAYS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] cfg_sa_bits;
  logic [CHANNELS-1:0] req_valid, req_write, req_ready, rd_resp_valid, wr_done_valid;
  mem_req_t req [CHANNELS];
  logic [ID_BITS-1:0] rd_resp_id [CHANNELS], wr_done_id [CHANNELS];
  ddr_cmd_t ddr_cmd [CHANNELS];
  mc_events_t events [CHANNELS];
  logic wb_mode [CHANNELS];
  logic signed [4:0] credit [CHANNELS][RANKS][BANKS];
  logic [SUBARRAYS-1:0] wl_en [CHANNELS][RANKS][BANKS], col_sel [CHANNELS][RANKS][BANKS];
  logic [SUBARRAYS-1:0] to_gbl [CHANNELS][RANKS][BANKS];
  logic [LRW-1:0] row_addr [CHANNELS][RANKS][BANKS][SUBARRAYS];
  logic [BANKS-1:0] ref_active [CHANNELS][RANKS], sa_conflict [CHANNELS][RANKS], ref_overlap [CHANNELS][RANKS];
  int checks = 0, failures = 0;
  int cyc = 0;

  dsarp_system dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL @%0d %s", cyc, what); end
  endtask

  initial begin
    repeat (CYCLES * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit out_rd [CHANNELS][256], out_wr [CHANNELS][256];
  int n_req = 0;
  bit stop_traffic = 0;
  int t_ref_end [CHANNELS][RANKS][BANKS];

  // traffic
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

  // responses and DRAM-side checks
  int e_post = 0, e_idle = 0, e_warp = 0, e_sched = 0, e_sarp = 0, e_block = 0, e_wb = 0, e_ovl = 0;
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
      e_sarp  += int'(events[c].sarp_act);
      e_block += int'(events[c].sarp_block);
      e_wb    += int'(events[c].wb_enter);
      for (int r = 0; r < RANKS; r++) begin
        chk(sa_conflict[c][r] == '0, "access into a refreshing subarray");
        for (int b = 0; b < BANKS; b++) begin
          if (cyc > 4) chk(ref_active[c][r][b] == (cyc < t_ref_end[c][r][b] && cyc >= t_ref_end[c][r][b] - T_RFC_PB),
                           $sformatf("DRAM refresh state %0d/%0d/%0d act=%0d end=%0d", c, r, b, ref_active[c][r][b], t_ref_end[c][r][b]));
          chk($onehot0(to_gbl[c][r][b]), "one subarray on the global bitlines");
        end
        e_ovl += $countones(ref_overlap[c][r]);
        // a REFpb on the bus reaches the DRAM's refresh unit two edges later
        if (!ddr_cmd[c].cs_n[r] && !ddr_cmd[c].ras_n && !ddr_cmd[c].cas_n && ddr_cmd[c].we_n)
          t_ref_end[c][r][ddr_cmd[c].ba] = cyc + 2 + T_RFC_PB;
      end
    end
  end

  initial begin
    req_valid = '0; req_write = '0; cfg_sa_bits = 3'd3;
    for (int c = 0; c < CHANNELS; c++) begin
      req[c] = '0;
      for (int i = 0; i < 256; i++) begin out_rd[c][i] = 0; out_wr[c][i] = 0; end
      for (int r = 0; r < RANKS; r++) for (int b = 0; b < BANKS; b++) t_ref_end[c][r][b] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (cyc >= CYCLES);
    stop_traffic = 1;
    repeat (4000) @(posedge clk);
    begin
      int left;
      left = 0;
      for (int c = 0; c < CHANNELS; c++) for (int i = 0; i < 256; i++) left += out_rd[c][i] + out_wr[c][i];
      chk(left == 0, $sformatf("requests never completed: %0d", left));
    end
    $display("requests=%0d sched=%0d postponed=%0d idle=%0d warp=%0d sarp_act=%0d held=%0d drains=%0d dram_overlap_cycles=%0d",
             n_req, e_sched, e_post, e_idle, e_warp, e_sarp, e_block, e_wb, e_ovl);
    chk(e_sched > 0, "scheduled refresh");
    chk(e_post > 0, "postponed refresh");
    chk(e_idle > 0, "idle-bank refresh");
    chk(e_warp > 0, "write-refresh parallelization");
    chk(e_wb > 0, "writeback mode");
    chk(e_block > 0, "request held back by a refreshing subarray");
    chk(e_sarp > 0 && e_ovl > 0, "access in a refreshing bank");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
