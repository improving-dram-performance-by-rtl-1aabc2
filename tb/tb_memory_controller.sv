// tb_memory_controller: one channel with default DDR3-1333 timing and the
// default refresh rate, driven by random reads and writes with phases of
// skewed bank use. An independent checker watches the command bus and keeps
// its own model of the DRAM: open rows, ACT spacing (tRCD, tRC, tRRD with
// the SARP stretch), per-bank refresh windows and which subarray each refresh
// covers (from a per-bank row counter of its own). It fails on any ACT into a
// refreshing subarray, any overlapping per-bank refreshes in a rank, any bank
// that falls more than 8 refreshes behind its schedule, any read answered
// twice or never, and any mechanism (postponed, idle-bank and WARP
// refreshes, accesses to a refreshing bank, held-back requests, write drains)
// that never happened.
module tb_memory_controller;
  import mc_pkg::*;
  localparam int CYCLES = 40000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] cfg_sa_bits;
  logic req_valid, req_write, req_ready;
  mem_req_t req;
  logic rd_resp_valid, wr_done_valid;
  logic [ID_BITS-1:0] rd_resp_id, wr_done_id;
  ddr_cmd_t ddr_cmd;
  mc_events_t events;
  logic signed [4:0] credit_out [RANKS][BANKS];
  logic wb_mode_out;
  int checks = 0, failures = 0;

  memory_controller dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL @%0d %s", cyc, what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (CYCLES * 3) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- stimulus
  bit out_rd [256], out_wr [256];
  int n_rd = 0, n_wr = 0, n_rdresp = 0, n_wrdone = 0;
  bit stop_traffic = 0;

  function automatic int free_id(input bit w);
    for (int k = 0; k < 256; k++) begin
      int i = (k + $urandom_range(0, 255)) % 256;
      if (!out_rd[i] && !out_wr[i]) return i;
    end
    return -1;
  endfunction

  always @(negedge clk) begin
    if (rst_n && !stop_traffic) begin
      int phase, id, rate;
      phase = (cyc / 3000) % 4;
      rate = (phase == 3) ? 10 : 35;
      req_valid = 0;
      id = free_id(0);
      if (id >= 0 && $urandom_range(0, 99) < rate) begin
        req_valid = 1;
        req_write = (phase == 1) ? ($urandom_range(0, 99) < 80) : ($urandom_range(0, 99) < 30);
        req.id   = ID_BITS'(id);
        req.rank = RANK_BITS'($urandom);
        // phases 0 and 2 crowd a few banks so refreshes meet busy banks
        req.bank = (phase == 0 || phase == 2) ? BANK_BITS'($urandom_range(0, 2)) : BANK_BITS'($urandom);
        req.row  = ROW_BITS'($urandom);
        req.col  = COL_BITS'($urandom);
      end
    end else if (stop_traffic) begin
      req_valid = 0;
    end
  end

  // ---------------------------------------------------------------- responses
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin      // accepted at this edge
      if (req_write) begin out_wr[req.id] = 1; n_wr++; end
      else begin out_rd[req.id] = 1; n_rd++; end
    end
    if (rd_resp_valid) begin
      chk(out_rd[rd_resp_id], "read response for an outstanding read");
      out_rd[rd_resp_id] = 0; n_rdresp++;
    end
    if (wr_done_valid) begin
      chk(out_wr[wr_done_id], "write done for an outstanding write");
      out_wr[wr_done_id] = 0; n_wrdone++;
    end
  end

  // ---------------------------------------------------------------- bus checker
  bit  open_b [RANKS][BANKS];
  int  orow [RANKS][BANKS], t_act [RANKS][BANKS], t_ref_end [RANKS][BANKS];
  int  ref_sa_m [RANKS][BANKS], rowcnt [RANKS][BANKS], nref [RANKS][BANKS];
  int  t_last_act [RANKS];
  int  n_sarp_act_seen = 0;

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < RANKS; r++) if (!ddr_cmd.cs_n[r]) begin
      int b;
      bit any_ref;
      b = ddr_cmd.ba;
      any_ref = 0;
      for (int k = 0; k < BANKS; k++) if (cyc < t_ref_end[r][k]) any_ref = 1;
      case ({ddr_cmd.ras_n, ddr_cmd.cas_n, ddr_cmd.we_n})
        3'b011: begin
          int sa;
          sa = int'(ddr_cmd.a) >> (ROW_BITS - 3);
          chk(!open_b[r][b], "ACT to a closed bank");
          chk(cyc - t_act[r][b] >= T_RAS + T_RP, "tRC");
          chk(cyc - t_last_act[r] >= (any_ref ? T_RRD_SARP : T_RRD), "tRRD");
          if (cyc < t_ref_end[r][b]) begin
            chk(sa != ref_sa_m[r][b], "ACT into the refreshing subarray");
            n_sarp_act_seen++;
          end
          open_b[r][b] = 1; orow[r][b] = ddr_cmd.a; t_act[r][b] = cyc; t_last_act[r] = cyc;
        end
        3'b101, 3'b100: begin
          chk(open_b[r][b], "column command to an open bank");
          chk(cyc - t_act[r][b] >= T_RCD, "tRCD");
          chk(ddr_cmd.a[10], "auto-precharge (closed-row policy)");
          open_b[r][b] = 0;
        end
        3'b001: begin
          chk(!ddr_cmd.a[10], "per-bank refresh only");
          chk(!open_b[r][b], "REFpb to a closed bank");
          chk(!any_ref, "no overlapping REFpb in a rank");
          chk(cyc - t_last_act[r] >= T_RRD, "tRRD before REFpb");
          ref_sa_m[r][b] = rowcnt[r][b] / (ROWS_PER_BANK / 8);
          rowcnt[r][b] = (rowcnt[r][b] + ROWS_PER_REF) % ROWS_PER_BANK;
          t_ref_end[r][b] = cyc + T_RFC_PB;
          t_last_act[r] = cyc;
          nref[r][b]++;
        end
        default: chk(0, "unexpected command");
      endcase
    end
  end

  // refresh schedule: bank b of each rank is due every 8 * tREFIpb
  always @(posedge clk) if (rst_n && cyc % 500 == 0 && cyc > 0) begin
    for (int r = 0; r < RANKS; r++)
      for (int b = 0; b < BANKS; b++) begin
        int due;
        due = (cyc - 1 - b * T_REFI_PB) / (BANKS * T_REFI_PB) + 1;
        if (cyc - 1 < b * T_REFI_PB) due = 0;
        chk(nref[r][b] >= due - REF_LIMIT - 1, $sformatf("bank %0d/%0d behind: %0d of %0d", r, b, nref[r][b], due));
        chk(credit_out[r][b] >= -8 && credit_out[r][b] <= 8, "credit range");
      end
  end

  // ---------------------------------------------------------------- events
  int e_post = 0, e_idle = 0, e_warp = 0, e_sched = 0, e_sarp = 0, e_block = 0, e_wb = 0;
  always @(posedge clk) if (rst_n) begin
    e_post  += int'(events.ref_postpone);
    e_idle  += int'(events.ref_idle_issue);
    e_warp  += int'(events.ref_warp_issue);
    e_sched += int'(events.ref_sched_issue);
    e_sarp  += int'(events.sarp_act);
    e_block += int'(events.sarp_block);
    e_wb    += int'(events.wb_enter);
  end

  initial begin
    req_valid = 0; req_write = 0; req = '0; cfg_sa_bits = 3'd3;
    for (int i = 0; i < 256; i++) begin out_rd[i] = 0; out_wr[i] = 0; end
    for (int r = 0; r < RANKS; r++) begin
      t_last_act[r] = -100;
      for (int b = 0; b < BANKS; b++) begin
        open_b[r][b] = 0; t_act[r][b] = -100; t_ref_end[r][b] = 0;
        ref_sa_m[r][b] = 0; rowcnt[r][b] = 0; nref[r][b] = 0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (cyc >= CYCLES);
    stop_traffic = 1;
    repeat (4000) @(posedge clk);
    begin
      int left_rd, left_wr;
      left_rd = 0; left_wr = 0;
      for (int i = 0; i < 256; i++) begin left_rd += out_rd[i]; left_wr += out_wr[i]; end
      chk(left_rd == 0, $sformatf("reads never answered: %0d", left_rd));
      chk(left_wr == 0, $sformatf("writes never done: %0d", left_wr));
    end
    $display("reads=%0d writes=%0d sched=%0d postponed=%0d idle=%0d warp=%0d sarp_act=%0d/%0d held=%0d drains=%0d",
             n_rd, n_wr, e_sched, e_post, e_idle, e_warp, e_sarp, n_sarp_act_seen, e_block, e_wb);
    chk(e_post > 0, "postponed refresh seen");
    chk(e_idle > 0, "idle-bank refresh seen");
    chk(e_warp > 0, "write-refresh parallelization seen");
    chk(e_sarp > 0 && n_sarp_act_seen > 0, "access to a refreshing bank seen");
    chk(e_block > 0, "request held back by a refreshing subarray");
    chk(e_wb > 0, "writeback mode seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
