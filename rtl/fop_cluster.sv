// fop_cluster: FOP PEs Cluster (N_PE FOP PEs, Ahead Sorter, Synchronization
// Module).
//
// Region loading: every localCell written into the idle region (LCT write)
// is also fed, as (x, index), into the shared Ahead Sorter. The cell last
// written is held back one write so that `sort_go` (which also writes the
// cell/segment counts) can send it with the end-of-list flag. The sorted
// stream, Cell_sort, is written into the idle region of every PE (cs_*),
// so sorting overlaps the work the PEs are still doing on the active
// region. `swap` then exchanges the regions of all PEs together.
// Paper: "the Ahead Sorter performs sorting of localCells based on their
// x-coordinates ... in advance"; sharing one sorter among all PEs and the
// hold-back of the last write are this design's choices.
// Insertion points: ip_valid/ip_ready per PE with a shared descriptor bus.
// Results: res_valid per PE (for counting) and the Synchronization Module's
// best result (`clear` starts a new target).
// Timing: `sort_ready` low means the sorter cannot take a cell this cycle;
// the writer must then hold LCT writes and `sort_go`.
module fop_cluster
  import flex_pkg::*;
#(
  parameter int unsigned N_PE      = 2,
  parameter int unsigned N_CELLS   = N_CELLS_DEF,
  parameter int unsigned N_SEGS    = N_SEGS_DEF,
  parameter int unsigned SEG_CELLS = SEG_CELLS_DEF,
  parameter int unsigned BP_N      = 2 * N_CELLS
) (
  input  logic        clk,
  input  logic        rst_n,
  // region loading (idle bank)
  input  logic        swap,
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
  input  logic        sort_go,
  input  logic [IDX_W:0] sort_ncells,
  input  logic [SEG_W:0] sort_nsegs,
  output logic        sort_ready,
  output logic        sort_busy,
  // insertion points
  input  target_t     tgt,
  input  logic        ip_valid [N_PE],
  output logic        ip_ready [N_PE],
  input  ip_desc_t    ip,
  output logic        res_valid [N_PE],
  input  logic        clear,
  output logic        best_valid,
  output fop_result_t best,
  output logic        busy
);
  // ---------------- Ahead Sorter ----------------
  logic   held_v;
  coord_t held_x;
  cidx_t  held_i;
  logic   s_in_valid, s_in_ready, s_in_last;
  logic   s_out_valid, s_out_last;
  logic [31:0] s_out_key;
  cidx_t  s_out_data;
  logic   s_busy;

  assign s_in_valid = held_v && (lct_we || sort_go);
  assign s_in_last  = sort_go;
  assign sort_ready = s_in_ready;

  sort_engine #(.N(N_CELLS), .RUN(8), .KEY_W(32), .DATA_W(IDX_W)) u_ahead (
    .clk, .rst_n,
    .in_valid(s_in_valid), .in_ready(s_in_ready), .in_key(held_x), .in_data(held_i),
    .in_last(s_in_last),
    .out_valid(s_out_valid), .out_key(s_out_key), .out_data(s_out_data), .out_last(s_out_last),
    .busy(s_busy)
  );

  cidx_t cs_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_v <= 1'b0; held_x <= '0; held_i <= '0; cs_cnt <= '0;
    end else begin
      if (lct_we) begin
        held_v <= 1'b1;
        held_x <= lct_wd.x;
        held_i <= lct_wa;
      end else if (sort_go) begin
        held_v <= 1'b0;
      end
      if (s_out_valid) cs_cnt <= s_out_last ? '0 : cs_cnt + 1'b1;
    end
  end
  assign sort_busy = s_busy || held_v;

  // ---------------- PEs ----------------
  fop_result_t pe_res [N_PE];
  logic        pe_busy [N_PE];
  for (genvar p = 0; p < int'(N_PE); p++) begin : g_pe
    fop_pe #(.N_CELLS(N_CELLS), .N_SEGS(N_SEGS), .SEG_CELLS(SEG_CELLS), .BP_N(BP_N)) u_pe (
      .clk, .rst_n, .swap,
      .lct_we, .lct_wa, .lct_wd,
      .lsc_we, .lsc_wseg, .lsc_wslot, .lsc_wd,
      .len_we, .len_wseg, .len_wd,
      .cs_we(s_out_valid), .cs_wa(cs_cnt), .cs_wd(s_out_data),
      .cnt_we(sort_go), .cnt_ncells(sort_ncells), .cnt_nsegs(sort_nsegs),
      .tgt, .ip_valid(ip_valid[p]), .ip_ready(ip_ready[p]), .ip,
      .res_valid(res_valid[p]), .res(pe_res[p]), .busy(pe_busy[p])
    );
  end

  always_comb begin
    busy = 1'b0;
    for (int p = 0; p < int'(N_PE); p++) busy |= pe_busy[p];
  end

  sync_module #(.N_PE(N_PE)) u_sync (
    .clk, .rst_n, .clear, .res_valid, .res(pe_res), .best_valid, .best
  );

`ifndef SYNTHESIS
  // the Ahead Sorter must not be offered a cell it cannot take
  a_sort_ready: assert property (@(posedge clk) disable iff (!rst_n) s_in_valid |-> s_in_ready);
  // regions are only swapped once Cell_sort is complete
  // Cell_sort leaves the sorter in ascending x order
  logic [31:0] last_key;
  always_ff @(posedge clk) if (s_out_valid) last_key <= s_out_last ? 32'h8000_0000 : s_out_key;
  a_cs_order: assert property (@(posedge clk) disable iff (!rst_n)
                               s_out_valid && cs_cnt != '0 |-> $signed(s_out_key) >= $signed(last_key));
  a_swap_sorted: assert property (@(posedge clk) disable iff (!rst_n) swap |-> !sort_busy);
`endif
endmodule
