// tb_writeback_mode_ctrl: drives read/write queue occupancies through a
// random walk and compares wb_mode and wb_enter with a reference model of the
// watermark rules (enter at >= HIGH_WM or when reads are empty; leave at
// <= LOW_WM with reads waiting, or when writes are empty).
module tb_writeback_mode_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [6:0] rq_count, wq_count;
  logic wb_mode, wb_enter;
  int checks = 0, failures = 0, entries = 0;
  bit m_wb;

  writeback_mode_ctrl #(.CW(7), .LOW_WM(32), .HIGH_WM(54)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, r;
    bit exp_enter;
    w = 0; r = 10; m_wb = 0;
    rq_count = 7'(r); wq_count = 7'(w);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      // random walk: writes accumulate, reads come and go
      if (m_wb) w = w - ($urandom_range(0, 3) == 0 ? 0 : 1);
      else      w = w + ($urandom_range(0, 2) == 0 ? 1 : 0);
      if (w < 0) w = 0;
      if (w > 64) w = 64;
      r = ($urandom_range(0, 30) == 0) ? 0 : (r == 0 ? $urandom_range(0, 3) : r);
      rq_count = 7'(r); wq_count = 7'(w);
      exp_enter = !m_wb && (w >= 54 || (r == 0 && w != 0));
      if (exp_enter) m_wb = 1;
      else if (m_wb && (w == 0 || (w <= 32 && r != 0))) m_wb = 0;
      @(posedge clk); #1;
      checks += 2;
      if (wb_mode !== m_wb || wb_enter !== exp_enter) begin
        failures++;
        $display("FAIL it=%0d r=%0d w=%0d wb=%0d/%0d", it, r, w, wb_mode, m_wb);
      end
      if (exp_enter) entries++;
    end
    checks++;
    if (entries == 0) failures++;
    $display("writeback entries: %0d", entries);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
