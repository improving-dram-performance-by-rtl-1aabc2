// tb_mc_pkg: checks the shared package on its own. The derived refresh and
// timing constants are recomputed here from the physical values they stand
// for (nanoseconds at the 1.5 ns DDR3-1333 clock, the 2.3 ratio between
// all-bank and per-bank refresh time, the 13.8 % tFAW/tRRD stretch), and the
// row-to-subarray function is compared with integer division of the row
// number by the subarray size for random rows and every supported subarray
// count (1 to 64). The idle command must deselect every rank.
module tb_mc_pkg;
  import mc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int ceil_div(input longint a, input longint b);
    return int'((a + b - 1) / b);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ddr_cmd_t n;
    // refresh: times in picoseconds, clock 1500 ps
    chk(T_REFI_AB == 3900000 / 1500, "tREFIab = 3.9 us");
    chk(T_REFI_PB * BANKS == T_REFI_AB, "tREFIpb = tREFIab / banks");
    chk(T_RFC_AB == ceil_div(350000, 1500), "tRFCab = 350 ns");
    chk(T_RFC_PB == ceil_div(350000 * 10, 23 * 1500), "tRFCpb = tRFCab / 2.3");
    chk(T_FAW_SARP == ceil_div(T_FAW * 1138, 1000), "tFAW stretched by 13.8 %");
    chk(T_RRD_SARP == ceil_div(T_RRD * 1138, 1000), "tRRD stretched by 13.8 %");
    chk(ROWS_PER_REF * 8192 == ROWS_PER_BANK, "8192 refreshes cover a bank");
    chk(COLS_PER_ROW * 64 == 8192, "8 KB row of 64 B lines");
    chk(REF_LIMIT == 8 && LOW_WM == 32 && RQ_DEPTH == 64 && WQ_DEPTH == 64, "controller sizes");
    chk(CHANNELS == 2 && RANKS == 2 && BANKS == 8 && SUBARRAYS == 8, "organisation");
    chk((1 << SA_BITS_MAX) == 64, "up to 64 subarrays");
    // row to subarray
    for (int k = 0; k < 20000; k++) begin
      automatic int sa  = $urandom_range(0, SA_BITS_MAX);
      automatic int row = $urandom_range(0, ROWS_PER_BANK - 1);
      automatic int exp = row / (ROWS_PER_BANK >> sa);
      chk(int'(row_subarray(ROW_BITS'(row), 3'(sa))) == exp,
          $sformatf("row %0d with %0d subarrays", row, 1 << sa));
    end
    // idle command
    n = ddr_nop();
    chk(n.cs_n == '1 && n.ras_n && n.cas_n && n.we_n, "NOP deselects all ranks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
