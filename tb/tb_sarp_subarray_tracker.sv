// tb_sarp_subarray_tracker: issues per-bank refreshes in random order and
// checks the latched refreshing subarray and local-row shadow of every bank
// against the row counter it mirrors (row = subarray * rows_per_subarray +
// local row, advancing ROWS_PER_RF rows per refresh), for 8 and 2 subarrays.
module tb_sarp_subarray_tracker;
  import mc_pkg::*;
  localparam int NR = 256, RPR = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] cfg_sa_bits;
  logic ref_issue;
  logic [2:0] ref_bank;
  logic [SA_BITS_MAX-1:0] ref_sa [8];
  logic [7:0] local_row [8];
  int checks = 0, failures = 0, wraps = 0;
  int rowc [8];

  sarp_subarray_tracker #(.NB(8), .NROWS(NR), .ROWS_PER_RF(RPR)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      int sab, per;
      sab = pass == 0 ? 3 : 1;
      per = NR >> sab;
      cfg_sa_bits = 3'(sab); ref_issue = 0; ref_bank = 0; rst_n = 0;
      for (int b = 0; b < 8; b++) rowc[b] = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      for (int it = 0; it < 1500; it++) begin
        int b, exp_sa;
        @(negedge clk);
        b = $urandom_range(0, 7);
        ref_issue = 1; ref_bank = 3'(b);
        exp_sa = rowc[b] / per;
        @(negedge clk);
        ref_issue = 0;
        rowc[b] = (rowc[b] + RPR) % NR;
        if (rowc[b] == 0) wraps++;
        checks += 2;
        if (int'(ref_sa[b]) != exp_sa) begin failures++; $display("FAIL sa b%0d %0d vs %0d", b, ref_sa[b], exp_sa); end
        if (int'(local_row[b]) != rowc[b] % per) begin failures++; $display("FAIL lr"); end
      end
    end
    checks++;
    if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
