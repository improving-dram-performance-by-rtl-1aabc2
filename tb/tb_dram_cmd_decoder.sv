// tb_dram_cmd_decoder: random command-pin patterns for rank 1 of two. Each
// decoded command, bank, row, column and auto-precharge flag is compared one
// cycle later with a table of the DDR3 truth table plus the per-bank refresh
// rule (REF with A10 = 0 is REFpb for the bank on BA).
module tb_dram_cmd_decoder;
  import mc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ddr_cmd_t cmd_in;
  dram_cmd_e cmd;
  logic [BANK_BITS-1:0] bank;
  logic [ROW_BITS-1:0] row;
  logic [COL_BITS-1:0] col;
  logic auto_pre;
  int checks = 0, failures = 0, n_refpb = 0;

  dram_cmd_decoder #(.RANK_ID(1)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_in = ddr_nop();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      dram_cmd_e exp;
      @(negedge clk);
      cmd_in = ddr_cmd_t'({$urandom, $urandom});
      case ({cmd_in.ras_n, cmd_in.cas_n, cmd_in.we_n})
        3'b011: exp = CMD_ACT;
        3'b101: exp = CMD_RD;
        3'b100: exp = CMD_WR;
        3'b010: exp = CMD_PRE;
        3'b001: exp = cmd_in.a[10] ? CMD_REFAB : CMD_REFPB;
        default: exp = CMD_NOP;
      endcase
      if (cmd_in.cs_n[1]) exp = CMD_NOP;
      @(negedge clk);
      checks += 5;
      if (cmd != exp) begin failures++; $display("FAIL cmd %0d vs %0d", cmd, exp); end
      if (bank != cmd_in.ba) failures++;
      if (row != cmd_in.a) failures++;
      if (col != cmd_in.a[COL_BITS-1:0]) failures++;
      if (auto_pre != cmd_in.a[10]) failures++;
      if (exp == CMD_REFPB) n_refpb++;
    end
    checks++;
    if (n_refpb == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
