// dram_rank_periph: the modified peripheral logic of one DRAM rank.
//
// It joins the command decoder (which now decodes the bank ID of a per-bank
// refresh), the refresh unit (a refresh-subarray and a local-row counter per
// bank) and one SARP bank periphery per bank. The outputs are the per-subarray
// controls that go to the cell arrays, sense amplifiers and global bitlines,
// which are analog and not part of this logic.
//
// The rank is seen as a single device; the chips of a rank act in lock-step.
// All-bank refresh commands are decoded but not acted on: the controller of
// this design issues only per-bank refreshes. Timing: controls follow the
// command pins by one cycle (decoder register).
module dram_rank_periph
  import mc_pkg::*;
#(
  parameter int RANK_ID     = 0,
  parameter int NSA         = SUBARRAYS,
  parameter int T_RFC_PB_P  = T_RFC_PB
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  ddr_cmd_t                             cmd_in,
  output logic [NSA-1:0]                       wl_en    [BANKS],
  output logic [$clog2(ROWS_PER_BANK/NSA)-1:0] row_addr [BANKS][NSA],
  output logic [NSA-1:0]                       col_sel  [BANKS],
  output logic [NSA-1:0]                       to_gbl   [BANKS],
  output logic [BANKS-1:0]                     ref_active,
  output logic [BANKS-1:0]                     conflict,
  output logic [BANKS-1:0]                     overlap
);
  localparam int SAW = $clog2(NSA);
  localparam int LRW = $clog2(ROWS_PER_BANK / NSA);

  dram_cmd_e            cmd;
  logic [BANK_BITS-1:0] bank;
  logic [ROW_BITS-1:0]  row;
  logic [COL_BITS-1:0]  col_addr;   // column address goes to the I/O path
  logic                 auto_pre;
  logic [SAW-1:0]       ref_sa  [BANKS];
  logic [LRW-1:0]       ref_row [BANKS];

  dram_cmd_decoder #(.RANK_ID(RANK_ID)) u_dec (
    .clk, .rst_n, .cmd_in, .cmd, .bank, .row, .col(col_addr), .auto_pre);

  dram_refresh_unit #(.NB(BANKS), .NSA(NSA), .NROWS(ROWS_PER_BANK),
    .ROWS_PER_RF(ROWS_PER_REF), .T_RFC_PB(T_RFC_PB_P)) u_ref (
    .clk, .rst_n, .refpb(cmd == CMD_REFPB), .refpb_bank(bank),
    .ref_active, .ref_sa, .ref_row);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic here;
    assign here = (int'(bank) == b);
    sarp_bank_periph #(.NSA(NSA), .NROWS(ROWS_PER_BANK)) u_bank (
      .clk, .rst_n,
      .act(here && cmd == CMD_ACT), .act_row(row),
      .col(here && (cmd == CMD_RD || cmd == CMD_WR)), .auto_pre,
      .pre(here && cmd == CMD_PRE),
      .ref_active(ref_active[b]), .ref_sa(ref_sa[b]), .ref_row(ref_row[b]),
      .wl_en(wl_en[b]), .row_addr(row_addr[b]), .col_sel(col_sel[b]), .to_gbl(to_gbl[b]),
      .conflict(conflict[b]), .overlap(overlap[b]));
  end
endmodule
