// tb_warp_bank_select: random per-bank request counts and credits; the chosen
// bank must have the lowest count among banks with credit below 8 (lowest
// index on ties), and no bank may be chosen when every credit is at 8.
module tb_warp_bank_select;
  logic [7:0] demand_count [8];
  logic signed [4:0] credit [8];
  logic sel_valid;
  logic [2:0] sel_bank;
  int checks = 0, failures = 0;

  warp_bank_select #(.BANKS(8), .CW(8), .LIMIT(8)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 4000; it++) begin
      int best, bi;
      for (int b = 0; b < 8; b++) begin
        demand_count[b] = 8'($urandom_range(0, it % 3 == 0 ? 3 : 60));
        credit[b] = 5'(($urandom_range(0, 3) == 0) ? 8 : $urandom_range(0, 16) - 8);
      end
      if (it % 97 == 0) for (int b = 0; b < 8; b++) credit[b] = 5'sd8;
      best = 1000; bi = -1;
      for (int b = 0; b < 8; b++)
        if (credit[b] < 8 && int'(demand_count[b]) < best) begin best = demand_count[b]; bi = b; end
      #1;
      checks++;
      if (sel_valid != (bi >= 0) || (bi >= 0 && int'(sel_bank) != bi)) begin
        failures++;
        $display("FAIL it=%0d exp %0d got %0d/%0d", it, bi, sel_valid, sel_bank);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
