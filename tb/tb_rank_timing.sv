// tb_rank_timing: directed timing checks of one rank with DDR3-1333 values.
//  - ACT to column command: col_ok rises exactly tRCD cycles after the ACT;
//  - read with auto-precharge: the bank takes a new ACT tRAS + tRP = tRC
//    (33) cycles after the first ACT;
//  - tRRD = 4 between ACTs to different banks, five ACTs limited by tFAW = 20;
//  - a REFpb keeps the bank refreshing for tRFCpb cycles, blocks a second
//    REFpb in the rank, and stretches tRRD to 5 and tFAW to 23 meanwhile;
//  - a refreshing bank still accepts an ACT (SARP).
module tb_rank_timing;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iss_act, iss_rd, iss_wr, iss_ref;
  logic [2:0] iss_bank;
  logic [15:0] iss_row;
  logic [7:0] act_ok, col_ok, ref_ok, bank_open, refreshing;
  logic [15:0] open_row [8];
  int checks = 0, failures = 0;

  rank_timing #(.NB(8), .RW(16)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic issue(input int kind, input int b, input int row = 0);
    iss_act = kind == 0; iss_rd = kind == 1; iss_wr = kind == 2; iss_ref = kind == 3;
    iss_bank = 3'(b); iss_row = 16'(row);
    @(negedge clk);
    iss_act = 0; iss_rd = 0; iss_wr = 0; iss_ref = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    iss_act = 0; iss_rd = 0; iss_wr = 0; iss_ref = 0; iss_bank = 0; iss_row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(act_ok == 8'hFF && ref_ok == 8'hFF, "idle after reset");
    // ACT bank 0, count cycles to col_ok
    issue(0, 0, 16'h1234);
    chk(bank_open[0] && open_row[0] == 16'h1234, "open row");
    n = 1; while (!col_ok[0] && n < 400) begin @(negedge clk); n++; end
    chk(n == 9, $sformatf("tRCD %0d", n));
    issue(1, 0);                       // read + auto-precharge at cycle 9
    n = 10; while (!act_ok[0] && n < 400) begin @(negedge clk); n++; end
    chk(n == 33, $sformatf("tRC %0d", n));
    // tRRD and tFAW
    repeat (30) @(negedge clk);
    issue(0, 1); n = 1;
    while (!act_ok[2]) begin @(negedge clk); n++; end
    chk(n == 4, $sformatf("tRRD %0d", n));
    for (int b = 2; b <= 4; b++) begin     // ACTs 4 cycles apart: 0, 4, 8, 12
      issue(0, b); n++;
      while (!act_ok[b+1]) begin @(negedge clk); n++; end
    end
    // the fifth ACT must wait for the four-activate window: 20 after the first
    chk(n == 20, $sformatf("tFAW %0d", n));
    // close those banks
    for (int b = 1; b <= 4; b++) begin while (!col_ok[b]) @(negedge clk); issue(2, b); end
    repeat (60) @(negedge clk);
    // refresh bank 6
    chk(ref_ok[6], "ref ok");
    issue(3, 6); n = 1;
    chk(refreshing[6] && !ref_ok[7], "refreshing, no overlap");
    chk(act_ok[6] == 1'b0, "tRRD after REFpb");
    while (!act_ok[7]) begin @(negedge clk); n++; end
    chk(n == 5, $sformatf("stretched tRRD after REF %0d", n));
    chk(act_ok[6], "refreshing bank accepts ACT (SARP)");
    issue(0, 7); n = 1;
    while (!act_ok[0]) begin @(negedge clk); n++; end
    chk(n == 5, $sformatf("stretched tRRD in refresh %0d", n));
    n = 1; while (refreshing[6]) begin @(negedge clk); n++; end
    chk(n >= 102 - 12 && n <= 102, $sformatf("tRFCpb %0d", n));
    chk(ref_ok[5], "ref allowed after tRFCpb");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
