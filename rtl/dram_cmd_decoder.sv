// dram_cmd_decoder: command decoder of one DRAM rank.
//
// Decodes the DDR3 command pins (CS#, RAS#, CAS#, WE#) for this rank into
// ACT, RD, WR, PRE and REF. The DARP change is on REF: with A10 = 0 the
// command is a per-bank refresh and the bank to refresh is taken from the
// bank address pins, so the controller, not the DRAM, picks the bank. With
// A10 = 1 it is an ordinary all-bank refresh. Placing the bank ID on BA and
// the all/per-bank choice on A10 is this design's encoding (LPDDR3 uses a
// separate command bit). On RD/WR, A10 = 1 requests auto-precharge.
//
// Timing: outputs are registered, one cycle after the pins.
module dram_cmd_decoder
  import mc_pkg::*;
#(
  parameter int RANK_ID = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  ddr_cmd_t             cmd_in,
  output dram_cmd_e            cmd,
  output logic [BANK_BITS-1:0] bank,
  output logic [ROW_BITS-1:0]  row,
  output logic [COL_BITS-1:0]  col,
  output logic                 auto_pre
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd <= CMD_NOP; bank <= '0; row <= '0; col <= '0; auto_pre <= 1'b0;
    end else begin
      bank     <= cmd_in.ba;
      row      <= cmd_in.a;
      col      <= cmd_in.a[COL_BITS-1:0];
      auto_pre <= cmd_in.a[10];
      if (cmd_in.cs_n[RANK_ID]) cmd <= CMD_NOP;
      else begin
        unique case ({cmd_in.ras_n, cmd_in.cas_n, cmd_in.we_n})
          3'b011:  cmd <= CMD_ACT;
          3'b101:  cmd <= CMD_RD;
          3'b100:  cmd <= CMD_WR;
          3'b010:  cmd <= CMD_PRE;
          3'b001:  cmd <= cmd_in.a[10] ? CMD_REFAB : CMD_REFPB;
          default: cmd <= CMD_NOP;
        endcase
      end
    end
  end
endmodule
