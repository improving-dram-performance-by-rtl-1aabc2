// tb_request_queue: random enqueue/dequeue against a reference queue model.
// Checks entry order after collapsing, count, full behaviour and the per-bank
// occupancy counters.
module tb_request_queue;
  import mc_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enq_valid, enq_ready, deq_valid;
  mem_req_t enq_req;
  logic [$clog2(D)-1:0] deq_idx;
  mem_req_t entries [D];
  logic [D-1:0] valid;
  logic [$clog2(D):0] count;
  logic [$clog2(D):0] bank_count [RANKS][BANKS];
  int checks = 0, failures = 0;
  mem_req_t model [$];

  request_queue #(.DEPTH(D)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enq_valid = 0; deq_valid = 0; enq_req = '0; deq_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      enq_valid = ($urandom_range(0, 99) < (it < 1500 ? 70 : 40));
      enq_req = '0;
      enq_req.id = 8'(it);
      enq_req.rank = RANK_BITS'($urandom);
      enq_req.bank = BANK_BITS'($urandom);
      enq_req.row = ROW_BITS'($urandom);
      enq_req.col = COL_BITS'($urandom);
      deq_valid = (model.size() > 0) && ($urandom_range(0, 99) < 45);
      deq_idx = deq_valid ? ($clog2(D))'($urandom_range(0, model.size() - 1)) : '0;
      chk(enq_ready == (model.size() < D), "enq_ready");
      @(posedge clk);
      #1;
      begin
        bit can_enq;
        can_enq = enq_valid && model.size() < D;   // full queue refuses even with a removal
        if (deq_valid) model.delete(int'(deq_idx));
        if (can_enq) model.push_back(enq_req);
      end
      chk(int'(count) == model.size(), "count");
      for (int i = 0; i < model.size(); i++)
        chk(valid[i] && entries[i] == model[i], $sformatf("entry %0d", i));
      for (int i = model.size(); i < D; i++) chk(!valid[i], "valid tail");
      for (int r = 0; r < RANKS; r++)
        for (int b = 0; b < BANKS; b++) begin
          automatic int n = 0;
          foreach (model[i]) if (model[i].rank == r && model[i].bank == b) n++;
          chk(int'(bank_count[r][b]) == n, "bank_count");
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
