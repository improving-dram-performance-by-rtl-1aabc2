// sarp_bank_periph: the peripheral logic of one DRAM bank with SARP.
//
// In an unmodified bank one global row decoder and latch drive a single
// (subarray ID, subarray row address) pair to all subarrays, so only one row
// can be active. SARP adds, per subarray:
//  - a refresh control (REF? and =ID?): the subarray is being refreshed when
//    the bank is refreshing and the refresh-subarray counter equals its ID;
//  - two muxes: the subarray's row address and its select come from the
//    refresh counters while it is refreshed, otherwise from the latch of the
//    global row decoder;
//  - column-select gating: column select reaches the subarray's row buffer
//    only if that subarray is not being refreshed, so the refreshing row
//    buffer is never connected to the global bitlines.
// Together these let one subarray be refreshed while another serves reads and
// writes through the shared global bitlines and I/O buffer.
//
// Inputs are the decoded commands for this bank (ACT with its row, RD/WR with
// auto-precharge flag) and the bank's refresh state from the refresh unit.
// Outputs per subarray: wl_en (a row is raised), row_addr (local row),
// col_sel (gated column select) and to_gbl (row buffer driving the global
// bitlines). The row's subarray is its top log2(NSA) bits. The access latch
// holds from the ACT until the column command with auto-precharge; a column
// command without auto-precharge keeps it until a PRE. Timing of the cell
// array itself is outside this logic (the cell arrays are analog).
module sarp_bank_periph #(
  parameter int NSA   = 8,
  parameter int NROWS = 65536
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          act,
  input  logic [$clog2(NROWS)-1:0]      act_row,
  input  logic                          col,
  input  logic                          auto_pre,
  input  logic                          pre,
  input  logic                          ref_active,
  input  logic [$clog2(NSA)-1:0]        ref_sa,
  input  logic [$clog2(NROWS/NSA)-1:0]  ref_row,
  output logic [NSA-1:0]                wl_en,
  output logic [$clog2(NROWS/NSA)-1:0]  row_addr [NSA],
  output logic [NSA-1:0]                col_sel,
  output logic [NSA-1:0]                to_gbl,
  output logic                          conflict,   // access ACT to refreshing subarray
  output logic                          overlap     // refresh and access in parallel
);
  localparam int RW  = $clog2(NROWS);
  localparam int SAW = $clog2(NSA);
  localparam int LRW = RW - SAW;

  logic           acc_open;
  logic [SAW-1:0] acc_sa;
  logic [LRW-1:0] acc_row;
  logic [NSA-1:0] ref_sel, acc_sel;

  always_comb begin
    for (int i = 0; i < NSA; i++) begin
      ref_sel[i]  = ref_active && (ref_sa == SAW'(i));          // REF? and =ID?
      acc_sel[i]  = acc_open && (acc_sa == SAW'(i));
      wl_en[i]    = ref_sel[i] || acc_sel[i];                     // subarray select mux
      row_addr[i] = ref_sel[i] ? ref_row : acc_row;               // row address mux
      col_sel[i]  = col && !ref_sel[i];                           // column-select gate
      to_gbl[i]   = col_sel[i] && acc_sel[i];
    end
  end
  assign conflict = act && ref_active && (act_row[RW-1 -: SAW] == ref_sa);
  assign overlap  = ref_active && acc_open;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_open <= 1'b0; acc_sa <= '0; acc_row <= '0;
    end else begin
      if (act) begin
        acc_open <= 1'b1;
        acc_sa   <= act_row[RW-1 -: SAW];
        acc_row  <= act_row[LRW-1:0];
      end else if ((col && auto_pre) || pre) begin
        acc_open <= 1'b0;
      end
    end
  end

  a_one_on_gbl: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(to_gbl));
  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n) !conflict);
  a_act_closed: assert property (@(posedge clk) disable iff (!rst_n) act |-> !acc_open);
endmodule
