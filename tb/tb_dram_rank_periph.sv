// tb_dram_rank_periph: drives DDR3 command pins to rank 1 of two and checks
// the per-subarray controls. A per-bank refresh to bank 3 must raise only
// bank 3's refresh (subarray 0, its first refresh) for tRFCpb cycles (20
// here); an ACT to bank 3 in subarray 5 during that refresh must raise a
// second row in the same bank, and the following read with auto-precharge
// must connect only subarray 5 to the global bitlines while column select to
// subarray 0 stays blocked. Commands for rank 0 must be ignored, and the
// next refresh of bank 3 must continue with the next rows.
module tb_dram_rank_periph;
  import mc_pkg::*;
  localparam int RFC = 24;
  localparam int LRW = $clog2(ROWS_PER_BANK / SUBARRAYS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ddr_cmd_t cmd_in;
  logic [SUBARRAYS-1:0] wl_en [BANKS], col_sel [BANKS], to_gbl [BANKS];
  logic [LRW-1:0] row_addr [BANKS][SUBARRAYS];
  logic [BANKS-1:0] ref_active, conflict, overlap;
  int checks = 0, failures = 0;

  dram_rank_periph #(.RANK_ID(1), .T_RFC_PB_P(RFC)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic send(input int rank, input bit ras_n, cas_n, we_n, input int ba, input int a);
    cmd_in = ddr_nop();
    cmd_in.cs_n[rank] = 1'b0;
    cmd_in.ras_n = ras_n; cmd_in.cas_n = cas_n; cmd_in.we_n = we_n;
    cmd_in.ba = BANK_BITS'(ba); cmd_in.a = ROW_BITS'(a);
    @(negedge clk);
    cmd_in = ddr_nop();
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    cmd_in = ddr_nop();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // rank 0 commands are not for this rank
    send(0, 0, 0, 1, 3, 0);
    @(negedge clk);
    chk(ref_active == '0, "other rank's REF ignored");
    // REFpb bank 3 (A10 = 0)
    send(1, 0, 0, 1, 3, 0);
    @(negedge clk);   // decoder register, then the refresh unit register
    chk(ref_active == 8'b0000_1000, "bank 3 refreshing");
    chk(wl_en[3] == 8'b0000_0001 && row_addr[3][0] == '0,
        $sformatf("subarray 0 row 0 refreshed %b %0d", wl_en[3], row_addr[3][0]));
    // ACT bank 3, subarray 5, local row 77
    send(1, 0, 1, 1, 3, 5 * (ROWS_PER_BANK / SUBARRAYS) + 77);
    @(negedge clk);
    chk(wl_en[3] == 8'b0010_0001, "refresh and access rows raised together");
    chk(int'(row_addr[3][5]) == 77, "access row address");
    chk(overlap[3] && conflict == '0, "parallel refresh and access");
    // read with auto-precharge (A10 = 1)
    cmd_in = ddr_nop();
    cmd_in.cs_n[1] = 0; cmd_in.ras_n = 1; cmd_in.cas_n = 0; cmd_in.we_n = 1;
    cmd_in.ba = 3; cmd_in.a = ROW_BITS'(1 << 10);
    @(posedge clk); #1;
    chk(col_sel[3] == 8'b1111_1110, "column select kept from the refreshing subarray");
    chk(to_gbl[3] == 8'b0010_0000, "only subarray 5 on the global bitlines");
    @(negedge clk);
    cmd_in = ddr_nop();
    @(negedge clk);
    chk(wl_en[3] == 8'b0000_0001 && !overlap[3], "access closed, refresh continues");
    n = 0;
    while (ref_active[3]) begin @(negedge clk); n++; end
    chk(n + 4 == RFC, $sformatf("refresh length %0d", n + 4));
    // second refresh of bank 3 continues at local row 8
    send(1, 0, 0, 1, 3, 0);
    @(negedge clk);
    chk(row_addr[3][0] == LRW'(8), "next refresh starts at row 8");
    // REF with A10 = 1 (all-bank) is not a per-bank refresh
    while (ref_active[3]) @(negedge clk);
    send(1, 0, 0, 1, 0, 1 << 10);
    @(negedge clk);
    chk(ref_active == '0, "all-bank REF not acted on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
