// tb_ref_credit_counter: random postpone / pull-in requests, only legal ones
// driven, against a saturating reference count. Checks the credit value and
// the can_postpone / can_pull_in flags, and that both ends (-8, +8) are hit.
module tb_ref_credit_counter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic postpone, pull_in, can_postpone, can_pull_in;
  logic signed [4:0] credit;
  int checks = 0, failures = 0, m = 0, hit_lo = 0, hit_hi = 0;

  ref_credit_counter #(.LIMIT(8)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    postpone = 0; pull_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      int bias;
      @(negedge clk);
      checks += 3;
      if (int'(credit) != m) begin failures++; $display("FAIL credit %0d vs %0d", credit, m); end
      if (can_postpone != (m > -8)) failures++;
      if (can_pull_in  != (m <  8)) failures++;
      bias = (it / 500) % 2 ? 70 : 30;   // drift up and down in phases
      postpone = (m > -8) && ($urandom_range(0, 99) >= bias);
      pull_in  = (m <  8) && ($urandom_range(0, 99) <  bias);
      if (postpone && !pull_in) m--;
      else if (pull_in && !postpone) m++;
      if (m == -8) hit_lo++;
      if (m == 8) hit_hi++;
    end
    checks += 2;
    if (hit_lo == 0) failures++;
    if (hit_hi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
