// tb_dram_refresh_unit: per-bank refreshes to random banks of a small rank
// (128 rows, 4 subarrays of 32 rows, 8 rows per refresh, tRFCpb = 16). Checks
// that REF? stays high exactly tRFCpb cycles, that the refreshed local rows
// step through 8 consecutive rows, and that each bank's refresh-subarray and
// local-row counters advance on their own, carrying from row into subarray.
module tb_dram_refresh_unit;
  localparam int NR = 128, NSA = 4, RPR = 8, RFC = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic refpb;
  logic [2:0] refpb_bank;
  logic [7:0] ref_active;
  logic [1:0] ref_sa [8];
  logic [4:0] ref_row [8];
  int checks = 0, failures = 0, sa_changes = 0;
  int rowc [8];

  dram_refresh_unit #(.NB(8), .NSA(NSA), .NROWS(NR), .ROWS_PER_RF(RPR), .T_RFC_PB(RFC)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    refpb = 0; refpb_bank = 0;
    for (int b = 0; b < 8; b++) rowc[b] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int b, n, seen [$];
      b = $urandom_range(0, 7);
      seen.delete();
      @(negedge clk);
      checks++;
      if (int'(ref_sa[b]) * (NR / NSA) + int'(ref_row[b]) != rowc[b]) begin
        failures++; $display("FAIL start row b%0d", b);
      end
      refpb = 1; refpb_bank = 3'(b);
      @(negedge clk);
      refpb = 0;
      n = 0;
      while (ref_active[b]) begin
        int r;
        r = int'(ref_sa[b]) * (NR / NSA) + int'(ref_row[b]);
        if (seen.size() == 0 || seen[$] != r) seen.push_back(r);
        for (int o = 0; o < 8; o++) if (o != b && ref_active[o]) failures++;
        @(negedge clk); n++;
      end
      checks += 2;
      if (n != RFC) begin failures++; $display("FAIL busy %0d", n); end
      if (seen.size() < RPR) begin failures++; $display("FAIL rows %0d", seen.size()); end
      for (int k = 0; k < RPR && k < seen.size(); k++) begin
        checks++;
        if (seen[k] != (rowc[b] + k) % NR) begin failures++; $display("FAIL row %0d: %p start %0d", k, seen, rowc[b]); end
      end
      if ((rowc[b] + RPR) % (NR / NSA) == 0) sa_changes++;
      rowc[b] = (rowc[b] + RPR) % NR;
    end
    checks++;
    if (sa_changes == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
