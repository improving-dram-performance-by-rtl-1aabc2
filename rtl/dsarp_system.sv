// dsarp_system: the complete DSARP memory system, DARP refresh scheduling in
// the controller plus SARP subarray-parallel refresh in the DRAM.
//
// CHANNELS independent channels (2), each a memory_controller driving the
// command bus of RANKS ranks (2) whose modified periphery is dram_rank_periph.
// The requesting cores and caches, the SPD EEPROM (number of subarrays) and
// the DRAM cell arrays are outside: requests come in on the req_* ports per
// channel, the SPD value on cfg_sa_bits, and the per-subarray array controls
// leave on the wl_en / row_addr / col_sel / to_gbl ports. Addresses are
// already split into channel (port index), rank, bank, row and column.
//
// Timing: everything runs on one clock, the DDR3-1333 command clock
// (666 MHz, 1.5 ns). A command leaves the controller's register in the cycle
// after it is chosen and the DRAM periphery registers it once more before it
// acts; response and refresh timing are described in memory_controller and
// dram_refresh_unit. cfg_sa_bits must equal log2(NSA_P) for the controller's
// subarray shadow counters to match the DRAM's.
//
// Defaults are the evaluated configuration: 8 Gb chips (tRFCpb = 102 cycles),
// 32 ms retention (tREFIpb = 325 cycles), 8 subarrays per bank, tFAW/tRRD =
// 20/4 cycles. The parameters cover the sizes swept in the evaluation: 16 Gb
// and 32 Gb chips (tRFCpb 154 and 258), 64 ms retention (tREFIpb 650), 1 to
// 64 subarrays and other tFAW/tRRD pairs. The split into channels and ranks
// follows the evaluated system; the port style is this design's own.
module dsarp_system
  import mc_pkg::*;
#(
  parameter int T_REFI_PB_P = T_REFI_PB,
  parameter int T_RFC_PB_P  = T_RFC_PB,
  parameter int NSA_P       = SUBARRAYS,
  parameter int T_FAW_P     = T_FAW,
  parameter int T_RRD_P     = T_RRD
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [2:0]                cfg_sa_bits,
  input  logic     [CHANNELS-1:0]   req_valid,
  input  logic     [CHANNELS-1:0]   req_write,
  input  mem_req_t                  req          [CHANNELS],
  output logic     [CHANNELS-1:0]   req_ready,
  output logic     [CHANNELS-1:0]   rd_resp_valid,
  output logic [ID_BITS-1:0]        rd_resp_id   [CHANNELS],
  output logic     [CHANNELS-1:0]   wr_done_valid,
  output logic [ID_BITS-1:0]        wr_done_id   [CHANNELS],
  output ddr_cmd_t                  ddr_cmd      [CHANNELS],
  output mc_events_t                events       [CHANNELS],
  output logic                      wb_mode      [CHANNELS],
  output logic signed [4:0]         credit       [CHANNELS][RANKS][BANKS],
  output logic [NSA_P-1:0]          wl_en        [CHANNELS][RANKS][BANKS],
  output logic [$clog2(ROWS_PER_BANK/NSA_P)-1:0] row_addr [CHANNELS][RANKS][BANKS][NSA_P],
  output logic [NSA_P-1:0]          col_sel      [CHANNELS][RANKS][BANKS],
  output logic [NSA_P-1:0]          to_gbl       [CHANNELS][RANKS][BANKS],
  output logic [BANKS-1:0]          ref_active   [CHANNELS][RANKS],
  output logic [BANKS-1:0]          sa_conflict  [CHANNELS][RANKS],
  output logic [BANKS-1:0]          ref_overlap  [CHANNELS][RANKS]
);
  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    memory_controller #(.T_REFI_PB_P(T_REFI_PB_P), .T_RFC_PB_P(T_RFC_PB_P),
                        .T_FAW_P(T_FAW_P), .T_RRD_P(T_RRD_P)) u_mc (
      .clk, .rst_n, .cfg_sa_bits,
      .req_valid(req_valid[c]), .req_write(req_write[c]), .req(req[c]),
      .req_ready(req_ready[c]),
      .rd_resp_valid(rd_resp_valid[c]), .rd_resp_id(rd_resp_id[c]),
      .wr_done_valid(wr_done_valid[c]), .wr_done_id(wr_done_id[c]),
      .ddr_cmd(ddr_cmd[c]), .events(events[c]), .credit_out(credit[c]),
      .wb_mode_out(wb_mode[c]));

    for (genvar r = 0; r < RANKS; r++) begin : g_rank
      dram_rank_periph #(.RANK_ID(r), .NSA(NSA_P), .T_RFC_PB_P(T_RFC_PB_P)) u_rank (
        .clk, .rst_n, .cmd_in(ddr_cmd[c]),
        .wl_en(wl_en[c][r]), .row_addr(row_addr[c][r]), .col_sel(col_sel[c][r]),
        .to_gbl(to_gbl[c][r]), .ref_active(ref_active[c][r]),
        .conflict(sa_conflict[c][r]), .overlap(ref_overlap[c][r]));
    end
  end
endmodule
