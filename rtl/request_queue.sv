// request_queue: one of the controller's demand request queues (64 read or
// 64 write entries in the evaluated configuration).
//
// It is a collapsing queue: entries stay packed at the low indices in arrival
// order, so index 0 is always the oldest request and a scheduler that scans
// from index 0 upward gets first-come-first-served order for free. Any entry
// can be removed (deq_valid/deq_idx); the entries above it move down by one in
// the same cycle. A new request is appended behind the last valid entry.
// Enqueue and dequeue may happen in the same cycle.
//
// The queue also keeps, per rank and bank, how many of its requests target
// that bank. The refresh scheduler reads these occupancies to find idle banks
// and the least loaded bank. The counts are kept as registers updated by
// +1/-1 rather than summed over all entries.
//
// Timing: an enqueued request is visible on entries/valid the next cycle;
// enq_ready is low only when the queue is full.
module request_queue
  import mc_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     enq_valid,
  input  mem_req_t                 enq_req,
  output logic                     enq_ready,
  input  logic                     deq_valid,
  input  logic [$clog2(DEPTH)-1:0] deq_idx,
  output mem_req_t                 entries [DEPTH],
  output logic [DEPTH-1:0]         valid,
  output logic [$clog2(DEPTH):0]   count,
  output logic [$clog2(DEPTH):0]   bank_count [RANKS][BANKS]
);
  localparam int CW = $clog2(DEPTH) + 1;

  mem_req_t       q      [DEPTH];
  logic [CW-1:0]  cnt;
  logic [CW-1:0]  bcnt   [RANKS][BANKS];
  logic           do_enq;

  assign do_enq    = enq_valid && (cnt != CW'(DEPTH));
  assign enq_ready = (cnt != CW'(DEPTH));
  assign count     = cnt;
  assign entries   = q;
  assign bank_count = bcnt;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) valid[i] = (CW'(i) < cnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
      for (int r = 0; r < RANKS; r++)
        for (int b = 0; b < BANKS; b++) bcnt[r][b] <= '0;
    end else begin
      logic [CW-1:0] tail;
      tail = cnt;
      if (deq_valid) begin
        for (int i = 0; i < DEPTH - 1; i++)
          if (i >= int'(deq_idx)) q[i] <= q[i+1];
        tail = cnt - 1'b1;
      end
      if (do_enq) q[tail[CW-2:0]] <= enq_req;
      cnt <= tail + CW'(do_enq);
      for (int r = 0; r < RANKS; r++)
        for (int b = 0; b < BANKS; b++) begin
          logic inc, dec;
          inc = do_enq && (int'(enq_req.rank) == r) && (int'(enq_req.bank) == b);
          dec = deq_valid && (int'(q[deq_idx].rank) == r) && (int'(q[deq_idx].bank) == b);
          if (inc && !dec) bcnt[r][b] <= bcnt[r][b] + 1'b1;
          else if (dec && !inc) bcnt[r][b] <= bcnt[r][b] - 1'b1;
        end
    end
  end

  // A removal must name a valid entry.
  a_deq_valid: assert property (@(posedge clk) disable iff (!rst_n)
    deq_valid |-> (CW'(deq_idx) < cnt));
endmodule
