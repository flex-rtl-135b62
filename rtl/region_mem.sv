// region_mem: ping/pong store of one localRegion for a FOP PE.
//
// Holds the tables that describe a localRegion and that stay fixed while the
// insertion points of one target cell are evaluated:
//   - localCells Table (LCT): one 100-bit entry per localCell (x, y, w, h, f);
//     it has two read ports, standing for the table and its copy that double
//     its bandwidth;
//   - localSegment Cell Lists (LSC): for every row (localSegment) the indices
//     of its cells from left to right, split into an even-row and an odd-row
//     array;
//   - the number of cells of every segment (two read ports);
//   - Cell_sort (Cs): the localCells ordered by x (written by the Ahead
//     Sorter);
//   - the number of cells and segments of the region.
// There are two complete banks (ping and pong). The host side writes the idle
// bank while the SACS PE reads the active one, so the region of the next
// target cell can be loaded during computation; `swap` exchanges them.
// All reads are synchronous: address in cycle t, data in cycle t+1.
// One clock; the double-frequency memory clock of the original architecture
// is not modelled.
module region_mem
  import flex_pkg::*;
#(
  parameter int unsigned N_CELLS   = N_CELLS_DEF,
  parameter int unsigned N_SEGS    = N_SEGS_DEF,
  parameter int unsigned SEG_CELLS = SEG_CELLS_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        swap,
  output logic        active,      // bank read by the PE
  // ---- write side: idle bank ----
  input  logic        lct_we,
  input  cidx_t       lct_wa,
  input  lct_entry_t  lct_wd,
  input  logic        lsc_we,
  input  seg_t        lsc_wseg,
  input  slot_t       lsc_wslot,
  input  cidx_t       lsc_wd,
  input  logic        len_we,
  input  seg_t        len_wseg,
  input  logic [INS_W-1:0] len_wd,
  input  logic        cs_we,
  input  cidx_t       cs_wa,
  input  cidx_t       cs_wd,
  input  logic        cnt_we,
  input  logic [IDX_W:0] cnt_ncells,
  input  logic [SEG_W:0] cnt_nsegs,
  // ---- read side: active bank ----
  input  cidx_t       lct_ra,
  output lct_entry_t  lct_rd,
  input  cidx_t       lct2_ra,
  output lct_entry_t  lct2_rd,
  input  seg_t        lsc_rseg,
  input  slot_t       lsc_rslot,
  output cidx_t       lsc_rd,
  input  seg_t        len_rseg,
  output logic [INS_W-1:0] len_rd,
  input  seg_t        len2_rseg,
  output logic [INS_W-1:0] len2_rd,
  input  cidx_t       cs_ra,
  output cidx_t       cs_rd,
  output logic [IDX_W:0] ncells,
  output logic [SEG_W:0] nsegs
);
  localparam int unsigned HALF = N_SEGS / 2;
  localparam int unsigned LA   = $clog2(HALF * SEG_CELLS);

  lct_entry_t      lct   [2][N_CELLS];
  cidx_t           lsc_e [2][HALF * SEG_CELLS];   // rows 0, 2, 4, ...
  cidx_t           lsc_o [2][HALF * SEG_CELLS];   // rows 1, 3, 5, ...
  logic [INS_W-1:0] slen [2][N_SEGS];
  cidx_t           cs    [2][N_CELLS];
  logic [IDX_W:0]  ncells_q [2];
  logic [SEG_W:0]  nsegs_q  [2];

  logic act;
  assign active = act;
  assign ncells = ncells_q[act];
  assign nsegs  = nsegs_q[act];

  function automatic logic [LA-1:0] lsc_addr(seg_t s, slot_t k);
    return LA'((int'(s) >> 1) * SEG_CELLS + int'(k));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act         <= 1'b0;
      ncells_q[0] <= '0;
      ncells_q[1] <= '0;
      nsegs_q[0]  <= '0;
      nsegs_q[1]  <= '0;
    end else begin
      if (swap)   act <= ~act;
      if (cnt_we) begin
        ncells_q[~act] <= cnt_ncells;
        nsegs_q[~act]  <= cnt_nsegs;
      end
    end
  end

  // idle-bank writes
  always_ff @(posedge clk) begin
    if (lct_we) lct[~act][lct_wa] <= lct_wd;
    if (lsc_we) begin
      if (lsc_wseg[0]) lsc_o[~act][lsc_addr(lsc_wseg, lsc_wslot)] <= lsc_wd;
      else             lsc_e[~act][lsc_addr(lsc_wseg, lsc_wslot)] <= lsc_wd;
    end
    if (len_we) slen[~act][len_wseg] <= len_wd;
    if (cs_we)  cs[~act][cs_wa] <= cs_wd;
  end

  // active-bank reads
  always_ff @(posedge clk) begin
    lct_rd  <= lct[act][lct_ra];
    lct2_rd <= lct[act][lct2_ra];
    lsc_rd  <= lsc_rseg[0] ? lsc_o[act][lsc_addr(lsc_rseg, lsc_rslot)]
                           : lsc_e[act][lsc_addr(lsc_rseg, lsc_rslot)];
    len_rd  <= slen[act][len_rseg];
    len2_rd <= slen[act][len2_rseg];
    cs_rd   <= cs[act][cs_ra];
  end

endmodule
