// writeback_mode_ctrl: decides when the controller drains writes.
//
// Writes are buffered and sent to DRAM in batches to amortise the read/write
// bus turnaround. Writeback mode starts when the write queue holds HIGH_WM or
// more requests and ends when it has been drained down to the low watermark
// (LOW_WM = 32, as evaluated). The high watermark is not given and is this
// design's choice (54 of 64). Two further choices keep the controller from
// idling: writes are also drained when no read is waiting, and a drain that
// runs with an empty read queue continues until the write queue is empty or a
// read arrives.
//
// Interface: queue occupancies in, registered wb_mode out, plus a one-cycle
// wb_enter pulse when the mode is entered. wb_mode changes one cycle after the
// counts that cause it.
module writeback_mode_ctrl #(
  parameter int CW      = 7,
  parameter int LOW_WM  = 32,
  parameter int HIGH_WM = 54
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] rq_count,
  input  logic [CW-1:0] wq_count,
  output logic          wb_mode,
  output logic          wb_enter
);
  logic enter, leave;
  assign enter = !wb_mode && ((wq_count >= CW'(HIGH_WM)) ||
                              (rq_count == '0 && wq_count != '0));
  assign leave = wb_mode && ((wq_count == '0) ||
                             (wq_count <= CW'(LOW_WM) && rq_count != '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_mode  <= 1'b0;
      wb_enter <= 1'b0;
    end else begin
      wb_enter <= enter;
      if (enter) wb_mode <= 1'b1;
      else if (leave) wb_mode <= 1'b0;
    end
  end
endmodule
