// tb_darp_refresh_ctrl: runs the DARP refresh scheduler of one rank against a
// cycle model of the algorithm: the tREFIpb schedule in round-robin order,
// postponement of a due refresh while its bank has demand requests and credit
// above -8, mandatory queueing at -8, random idle-bank refresh when demand is
// blocked, and write-refresh parallelization at writeback entry and every
// tRFCpb in writeback mode. Compares the refresh request offered, the refresh
// queue and all credits every cycle. Timing is shortened (tREFIpb = 20,
// tRFCpb = 6 cycles). Phase 1 keeps every bank busy so that all credits fall
// to -8 and refreshes become mandatory; later phases randomise the inputs.
module tb_darp_refresh_ctrl;
  localparam int REFI = 20, RFC = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] demand_count [8];
  logic wb_mode, demand_blocked, ref_ack;
  logic [7:0] bank_ref_ready;
  logic ref_req_valid, ref_req_queued;
  logic [2:0] ref_req_bank;
  logic [7:0] ref_pending;
  logic signed [4:0] credit [8];
  logic ev_sched, ev_postpone, ev_idle, ev_warp;
  int checks = 0, failures = 0;
  int n_post = 0, n_sched = 0, n_mand = 0, n_idle = 0, n_warp = 0, n_lo = 0;

  darp_refresh_ctrl #(.BANKS(8), .CW(8), .T_REFI_PB(REFI), .T_RFC_PB(RFC), .LIMIT(8)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t %s", $time, what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  int cyc, rr, rfc, mc [8];
  bit wbq, mp [8];

  initial begin
    for (int b = 0; b < 8; b++) begin demand_count[b] = 1; mc[b] = 0; mp[b] = 0; end
    wb_mode = 0; demand_blocked = 0; ref_ack = 0; bank_ref_ready = '1;
    cyc = 1; rr = 0; rfc = 0; wbq = 0;   // one clock edge passes before the loop
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12000; t++) begin
      bit tick, post, sched, wtick, dowarp, anyp, qv, eidle;
      int wb_b, best, qb;
      @(negedge clk);
      // ---------------- stimulus
      if (t >= 1400) begin
        if (t % 16 == 0)
          for (int b = 0; b < 8; b++) demand_count[b] = 8'(($urandom_range(0, 2) == 0) ? 0 : $urandom_range(1, 9));
        demand_blocked = ($urandom_range(0, 3) != 0);
        bank_ref_ready = 8'($urandom) | 8'($urandom);
        if (t % 300 == 0) wb_mode = ($urandom_range(0, 1) == 1);
      end
      #1;
      // ---------------- expected request before the edge
      qv = 0; qb = 0;
      for (int b = 7; b >= 0; b--) if (mp[b] && (!qv || bank_ref_ready[b])) begin qv = 1; qb = b; end
      eidle = 0;
      for (int b = 0; b < 8; b++)
        if (demand_count[b] == 0 && mc[b] < 8 && bank_ref_ready[b] && !mp[b]) eidle = 1;
      eidle = eidle && demand_blocked && !qv;
      chk(ref_req_valid == (qv || eidle), "req valid");
      chk(ref_req_queued == qv, "req queued");
      if (qv) chk(int'(ref_req_bank) == qb, "queued bank");
      if (!qv && eidle)
        chk(demand_count[ref_req_bank] == 0 && mc[ref_req_bank] < 8 && bank_ref_ready[ref_req_bank]
            && !mp[ref_req_bank], "idle bank choice");
      ref_ack = ref_req_valid && bank_ref_ready[ref_req_bank] && ($urandom_range(0, 1) == 1);
      // ---------------- model update for this edge
      tick  = (cyc == REFI - 1);
      post  = tick && (demand_count[rr] != 0 || mp[rr]) && mc[rr] > -8;
      sched = tick && !post && !mp[rr];
      if (sched && demand_count[rr] != 0) n_mand++;
      wtick = wb_mode && (!wbq || rfc == RFC - 1);
      best = 1000; wb_b = -1;
      for (int b = 0; b < 8; b++) if (mc[b] < 8 && int'(demand_count[b]) < best) begin best = demand_count[b]; wb_b = b; end
      anyp = 0;
      for (int b = 0; b < 8; b++) anyp |= mp[b];
      dowarp = wtick && wb_b >= 0 && !anyp && !sched && !ref_ack;   // a refresh sent now counts as pending
      @(posedge clk);
      if (post) begin mc[rr]--; n_post++; end
      if (dowarp) begin mc[wb_b]++; mp[wb_b] = 1; n_warp++; end
      if (ref_ack && !qv) begin mc[ref_req_bank]++; n_idle++; end
      if (ref_ack && qv) mp[qb] = 0;
      if (sched) begin mp[rr] = 1; n_sched++; end
      rfc = (!wb_mode || !wbq || rfc == RFC - 1) ? 0 : rfc + 1;
      wbq = wb_mode;
      if (tick) rr = (rr + 1) % 8;
      cyc = tick ? 0 : cyc + 1;
      #1;
      for (int b = 0; b < 8; b++) begin
        chk(int'(credit[b]) == mc[b], $sformatf("credit[%0d] %0d vs %0d", b, credit[b], mc[b]));
        chk(ref_pending[b] == mp[b], $sformatf("pending[%0d]", b));
        if (mc[b] == -8) n_lo++;
      end
      ref_ack = 0;
    end
    $display("postponed=%0d scheduled=%0d mandatory=%0d idle=%0d warp=%0d", n_post, n_sched, n_mand, n_idle, n_warp);
    checks += 5;
    if (n_post == 0) failures++;
    if (n_mand == 0) failures++;
    if (n_idle == 0) failures++;
    if (n_warp == 0) failures++;
    if (n_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
