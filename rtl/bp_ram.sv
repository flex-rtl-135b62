// bp_ram: breakpoint buffer between the forward and backward traversals.
//
// The forward traversal (FWDT PE) stores every sorted breakpoint (x and left
// slope, unmerged) and the right-side value vR of every merged breakpoint;
// the backward traversal (BWDT PE) reads them in reverse order. Two banks
// let the forward traversal of the next insertion point run while the
// backward traversal of the current one reads the other bank: this is the
// coarse-grained stage of the multi-granularity pipeline. The bank pairing
// is this design's choice.
// Writes take effect at the clock edge; reads are synchronous (address in
// cycle t, data in cycle t+1).
module bp_ram
  import flex_pkg::*;
#(
  parameter int unsigned BP_N = 2 * N_CELLS_DEF
) (
  input  logic        clk,
  // raw breakpoint write / read
  input  logic        raw_we,
  input  logic        raw_wbank,
  input  logic [$clog2(BP_N)-1:0] raw_wa,
  input  coord_t      raw_wx,
  input  slope_t      raw_wsl,
  input  logic        raw_rbank,
  input  logic [$clog2(BP_N)-1:0] raw_ra,
  output coord_t      raw_rx,
  output slope_t      raw_rsl,
  // vR write / read, indexed by merged breakpoint
  input  logic        vr_we,
  input  logic        vr_wbank,
  input  logic [$clog2(BP_N)-1:0] vr_wa,
  input  cost_t       vr_wd,
  input  logic        vr_rbank,
  input  logic [$clog2(BP_N)-1:0] vr_ra,
  output cost_t       vr_rd
);
  coord_t rx  [2][BP_N];
  slope_t rsl [2][BP_N];
  cost_t  vr  [2][BP_N];

  always_ff @(posedge clk) begin
    if (raw_we) begin
      rx[raw_wbank][raw_wa]  <= raw_wx;
      rsl[raw_wbank][raw_wa] <= raw_wsl;
    end
    if (vr_we) vr[vr_wbank][vr_wa] <= vr_wd;
    raw_rx  <= rx[raw_rbank][raw_ra];
    raw_rsl <= rsl[raw_rbank][raw_ra];
    vr_rd   <= vr[vr_rbank][vr_ra];
  end
endmodule
