// mc_pkg: types and constants shared by the refresh-parallelizing memory
// controller (DARP + SARP, together "DSARP") and the modified DRAM periphery.
//
// The organisation follows the evaluated system: 2 channels, 2 ranks per
// channel, 8 banks per rank, 8 subarrays per bank, 64K rows per bank and
// 8 KB rows (64 B cache lines, so 128 column positions per row). Timing is
// given in DRAM clock cycles of DDR3-1333 (1.5 ns). The refresh numbers come
// from the evaluated refresh settings: tREFIab = 3.9 us, tRFCab = 350 ns for
// 8 Gb chips and tRFCpb = tRFCab / 2.3. The core DDR3-1333 numbers (tRCD,
// tRP, tCL, tRAS, tWR, tWTR, tRTP, tCCD) are the standard 9-9-9 speed bin and
// are this design's choice; tFAW = 20 and tRRD = 4 cycles are the baseline
// values used in the tFAW sensitivity study. SARP stretches tFAW and tRRD by
// 13.8 % while a per-bank refresh is in progress.
package mc_pkg;

  // ---------------- organisation ----------------
  localparam int CHANNELS      = 2;
  localparam int RANKS         = 2;
  localparam int BANKS         = 8;
  localparam int SUBARRAYS     = 8;
  localparam int ROWS_PER_BANK = 65536;
  localparam int COLS_PER_ROW  = 128;   // 8 KB row / 64 B line
  localparam int RANK_BITS     = $clog2(RANKS);
  localparam int BANK_BITS     = $clog2(BANKS);
  localparam int ROW_BITS      = $clog2(ROWS_PER_BANK);
  localparam int COL_BITS      = $clog2(COLS_PER_ROW);
  localparam int SA_BITS_MAX   = 6;      // up to 64 subarrays (sweep range)
  localparam int ID_BITS       = 8;      // request tag carried for responses

  // ---------------- queues ----------------
  localparam int RQ_DEPTH = 64;
  localparam int WQ_DEPTH = 64;
  localparam int LOW_WM   = 32;
  localparam int HIGH_WM  = 54;          // not given; design choice

  // ---------------- DDR3-1333 timing (cycles of 1.5 ns) ----------------
  localparam int T_RCD   = 9;
  localparam int T_RP    = 9;
  localparam int T_CL    = 9;
  localparam int T_CWL   = 7;
  localparam int T_RAS   = 24;
  localparam int T_BURST = 4;            // BL8 on a DDR bus
  localparam int T_CCD   = 4;
  localparam int T_WR    = 10;
  localparam int T_WTR   = 5;
  localparam int T_RTP   = 5;
  localparam int T_RTW   = T_CL + T_CCD + 2 - T_CWL;
  localparam int T_RRD   = 4;
  localparam int T_FAW   = 20;
  // SARP: tX_SARP = tX * (4*I_ACT + I_REF) / (4*I_ACT), +13.8 % for REFpb
  localparam int T_RRD_SARP = 5;         // ceil(4  * 1.138)
  localparam int T_FAW_SARP = 23;        // ceil(20 * 1.138)

  // ---------------- refresh (32 ms retention, 8 Gb) ----------------
  localparam int T_REFI_AB    = 2600;    // 3.9 us
  localparam int T_REFI_PB    = T_REFI_AB / BANKS;   // 325
  localparam int T_RFC_AB     = 234;     // 350 ns
  localparam int T_RFC_PB     = 102;     // 350 ns / 2.3 = 152 ns
  localparam int REF_LIMIT    = 8;       // postponed / pulled-in refreshes
  localparam int ROWS_PER_REF = 8;       // 64K rows / 8192 REFpb per bank

  // ---------------- types ----------------
  typedef struct packed {
    logic [ID_BITS-1:0]   id;
    logic [RANK_BITS-1:0] rank;
    logic [BANK_BITS-1:0] bank;
    logic [ROW_BITS-1:0]  row;
    logic [COL_BITS-1:0]  col;
  } mem_req_t;

  // DDR3-style command pins of one channel. A10 selects auto-precharge on
  // column commands and all-bank (1) versus per-bank (0) on REF; a per-bank
  // REF carries its bank ID on BA.
  typedef struct packed {
    logic [RANKS-1:0]     cs_n;
    logic                 ras_n;
    logic                 cas_n;
    logic                 we_n;
    logic [BANK_BITS-1:0] ba;
    logic [ROW_BITS-1:0]  a;
  } ddr_cmd_t;

  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_ACT   = 3'd1,
    CMD_RD    = 3'd2,
    CMD_WR    = 3'd3,
    CMD_PRE   = 3'd4,
    CMD_REFPB = 3'd5,
    CMD_REFAB = 3'd6
  } dram_cmd_e;

  // Controller activity markers, one pulse per event, used for statistics.
  typedef struct packed {
    logic ref_sched_issue;   // scheduled REFpb sent (bank idle or credit at -8)
    logic ref_postpone;      // scheduled REFpb postponed (bank busy)
    logic ref_idle_issue;    // out-of-order REFpb to an idle bank
    logic ref_warp_issue;    // REFpb chosen by write-refresh parallelization
    logic sarp_act;          // ACT to a bank that is being refreshed
    logic sarp_block;        // request held back: its subarray is refreshing
    logic wb_enter;          // writeback mode entered
  } mc_events_t;

  function automatic logic [SA_BITS_MAX-1:0] row_subarray(
      input logic [ROW_BITS-1:0] row, input logic [2:0] sa_bits);
    logic [ROW_BITS-1:0] s;
    s = (sa_bits == 3'd0) ? '0 : (row >> (ROW_BITS - int'(sa_bits)));
    return s[SA_BITS_MAX-1:0];
  endfunction

  function automatic ddr_cmd_t ddr_nop();
    ddr_cmd_t c;
    c = '0;
    c.cs_n  = '1;
    c.ras_n = 1'b1;
    c.cas_n = 1'b1;
    c.we_n  = 1'b1;
    return c;
  endfunction

endpackage
