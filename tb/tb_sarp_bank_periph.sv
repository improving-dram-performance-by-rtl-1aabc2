// tb_sarp_bank_periph: random refresh states and accesses to one bank with 8
// subarrays of 128 rows. For each case the expected per-subarray controls are
// worked out from the SARP rules: the refreshing subarray gets the refresh
// row and is raised, the accessed subarray gets the latched access row, the
// column select reaches every subarray except the refreshing one, and only
// the accessed subarray drives the global bitlines. Also checks that a refresh
// and an access run in parallel (overlap) and that an ACT into the
// refreshing subarray is flagged.
module tb_sarp_bank_periph;
  localparam int NSA = 8, NR = 1024, LR = NR / NSA;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic act, col, auto_pre, pre, ref_active;
  logic [9:0] act_row;
  logic [2:0] ref_sa;
  logic [6:0] ref_row;
  logic [NSA-1:0] wl_en, col_sel, to_gbl;
  logic [6:0] row_addr [NSA];
  logic conflict, overlap;
  int checks = 0, failures = 0, n_overlap = 0, n_conf = 0;

  sarp_bank_periph #(.NSA(NSA), .NROWS(NR)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act = 0; col = 0; auto_pre = 0; pre = 0; ref_active = 0; act_row = 0; ref_sa = 0; ref_row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      int asa, arow, rsa, rrow;
      bit refon;
      refon = $urandom_range(0, 3) != 0;
      rsa = $urandom_range(0, NSA - 1);
      rrow = $urandom_range(0, LR - 1);
      asa = $urandom_range(0, NSA - 1);
      if (refon && asa == rsa) asa = (asa + 1) % NSA;
      arow = $urandom_range(0, LR - 1);
      ref_active = refon; ref_sa = 3'(rsa); ref_row = 7'(rrow);
      // an ACT into the refreshing subarray is reported as a conflict
      if (it % 50 == 7 && refon) begin
        act = 1; act_row = 10'(rsa * LR + arow);
        #1; chk(conflict, "conflict flagged"); n_conf++;
        act = 0; #1;
      end
      // ACT to the access subarray
      act = 1; act_row = 10'(asa * LR + arow);
      #1; chk(!conflict, "no conflict");
      @(negedge clk);
      act = 0;
      #1;
      chk(overlap == refon, "overlap");
      if (overlap) n_overlap++;
      for (int i = 0; i < NSA; i++) begin
        bit rs, as;
        rs = refon && i == rsa;
        as = i == asa;
        chk(wl_en[i] == (rs || as), $sformatf("wl_en %0d", i));
        if (rs) chk(int'(row_addr[i]) == rrow, "refresh row");
        if (as) chk(int'(row_addr[i]) == arow, "access row");
        chk(!col_sel[i] && !to_gbl[i], "no column select yet");
      end
      // column command with auto-precharge
      col = 1; auto_pre = 1;
      #1;
      for (int i = 0; i < NSA; i++) begin
        chk(col_sel[i] == !(refon && i == rsa), $sformatf("col_sel gate %0d", i));
        chk(to_gbl[i] == (i == asa), $sformatf("to_gbl %0d", i));
      end
      @(negedge clk);
      col = 0; auto_pre = 0;
      #1;
      chk(!overlap && (wl_en == (refon ? NSA'(1) << rsa : '0)), "closed after auto-precharge");
    end
    checks += 2;
    if (n_overlap == 0) failures++;
    if (n_conf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
