// fop_pe: one FOP processing element.
//
// Evaluates insertion points of the current target cell one after another
// and returns, for each, the smallest total displacement and the target x
// that gives it. Inside, the operations of the optimised FOP loop form a
// multi-granularity pipeline:
//
//   region_mem (ping/pong) -> sacs_pe -> collector -> sort_engine (Sorter)
//        -> fwdt_pe -> bp_ram (2 banks) -> bwdt_pe -> result
//
//   fine grain    SACS streams each cell position as soon as it is final;
//                 the collector turns it into a breakpoint and the sorter
//                 takes it in the same cycle; the sorted stream feeds the
//                 forward traversal one breakpoint per cycle.
//   coarse grain  the forward and backward traversals run in opposite
//                 directions, so they are decoupled by the two banks of
//                 bp_ram: the forward traversal of insertion point k+1
//                 overlaps the backward traversal of k.
// SACS of the next insertion point may start while the sorter still works
// on the previous one; it stalls through back-pressure until the sorter
// takes input again. A forward traversal is only started on a bank the
// backward traversal no longer needs.
//
// Interface: ip_valid/ip_ready hand over insertion points; `tgt` stays
// stable while any is in flight. res_valid pulses once per insertion point,
// in order. The region write side fills the idle region bank; `swap` (only
// when !busy) makes it active.
//
// Lint notes: the region memory's `active` flag and the SACS `done` pulse
// are not needed here (results are tracked by the sorter's last flag) and
// are left unused; of the descriptor held for the forward traversal only
// x_lo, x_hi and id are used.
module fop_pe
  import flex_pkg::*;
#(
  parameter int unsigned N_CELLS   = N_CELLS_DEF,
  parameter int unsigned N_SEGS    = N_SEGS_DEF,
  parameter int unsigned SEG_CELLS = SEG_CELLS_DEF,
  parameter int unsigned BP_N      = 2 * N_CELLS
) (
  input  logic        clk,
  input  logic        rst_n,
  // region write side (idle bank)
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
  input  logic        cs_we,
  input  cidx_t       cs_wa,
  input  cidx_t       cs_wd,
  input  logic        cnt_we,
  input  logic [IDX_W:0] cnt_ncells,
  input  logic [SEG_W:0] cnt_nsegs,
  // insertion points
  input  target_t     tgt,
  input  logic        ip_valid,
  output logic        ip_ready,
  input  ip_desc_t    ip,
  output logic        res_valid,
  output fop_result_t res,
  output logic        busy
);
  localparam int unsigned AW = $clog2(BP_N);

  // ---------------- region memory ----------------
  cidx_t lct_ra, lct2_ra, lsc_rd, cs_ra, cs_rd;
  lct_entry_t lct_rd, lct2_rd;
  seg_t lsc_rseg, len_rseg, len2_rseg;
  slot_t lsc_rslot;
  logic [INS_W-1:0] len_rd, len2_rd;
  logic [IDX_W:0] ncells;
  logic [SEG_W:0] nsegs;
  logic active;

  region_mem #(.N_CELLS(N_CELLS), .N_SEGS(N_SEGS), .SEG_CELLS(SEG_CELLS)) u_region (
    .clk, .rst_n, .swap, .active,
    .lct_we, .lct_wa, .lct_wd, .lsc_we, .lsc_wseg, .lsc_wslot, .lsc_wd,
    .len_we, .len_wseg, .len_wd, .cs_we, .cs_wa, .cs_wd, .cnt_we, .cnt_ncells, .cnt_nsegs,
    .lct_ra, .lct_rd, .lct2_ra, .lct2_rd, .lsc_rseg, .lsc_rslot, .lsc_rd,
    .len_rseg, .len_rd, .len2_rseg, .len2_rd, .cs_ra, .cs_rd, .ncells, .nsegs
  );

  // ---------------- SACS ----------------
  logic sacs_ip_ready, sh_valid, sh_ready, sh_last, sacs_done, sacs_busy;
  shift_out_t sh;
  logic col_busy;

  assign ip_ready = sacs_ip_ready && !col_busy;

  sacs_pe #(.N_CELLS(N_CELLS), .N_SEGS(N_SEGS), .SEG_CELLS(SEG_CELLS)) u_sacs (
    .clk, .rst_n, .region_new(swap),
    .ip_valid(ip_valid && !col_busy), .ip_ready(sacs_ip_ready), .ip, .tgt,
    .out_valid(sh_valid), .out_ready(sh_ready), .out(sh), .out_last(sh_last),
    .done(sacs_done), .busy(sacs_busy),
    .lct_ra, .lct_rd, .lct2_ra, .lct2_rd, .lsc_rseg, .lsc_rslot, .lsc_rd,
    .len_rseg, .len_rd, .len2_rseg, .len2_rd, .cs_ra, .cs_rd, .ncells, .nsegs
  );

  // descriptor of the insertion point in SACS / collector
  ip_desc_t ip1;
  logic     accept;
  assign accept = ip_valid && ip_ready;

  // ---------------- collector -> sorter ----------------
  logic bp_valid, bp_ready, bp_last, sort_in_ready;
  bp_t  bp;
  logic wb;                            // bank the next forward traversal writes
  logic bank_conflict;

  collector u_col (
    .clk, .rst_n, .start(accept), .x_lo(ip1.x_lo), .x_hi(ip1.x_hi), .gx(tgt.gx),
    .in_valid(sh_valid), .in_ready(sh_ready), .in(sh), .in_last(sh_last),
    .bp_valid, .bp_ready, .bp, .bp_last, .busy(col_busy)
  );

  // the last breakpoint of an insertion point is held back until the bank
  // it will be traversed in is free
  assign bp_ready = sort_in_ready && !(bp_last && bank_conflict);

  logic so_valid, so_last, sort_busy;
  logic [31:0] so_key;
  logic [2*SLOPE_W-1:0] so_data;

  sort_engine #(.N(BP_N), .RUN(8), .KEY_W(32), .DATA_W(2 * SLOPE_W)) u_sorter (
    .clk, .rst_n,
    .in_valid(bp_valid && bp_ready), .in_ready(sort_in_ready),
    .in_key(bp.x), .in_data({bp.slopel, bp.sloper}), .in_last(bp_last),
    .out_valid(so_valid), .out_key(so_key), .out_data(so_data), .out_last(so_last),
    .busy(sort_busy)
  );

  // ---------------- forward traversal ----------------
  ip_desc_t ipf;                       // insertion point in sorter / FWDT
  logic     ipf_bank;
  logic     fwd_start, fwd_done, fwd_act;
  logic [AW:0] f_nb, f_nq;
  logic raw_we, raw_wbank, raw_rbank, vr_we, vr_wbank, vr_rbank;
  logic [AW-1:0] raw_wa, raw_ra, vr_wa, vr_ra;
  coord_t raw_wx, raw_rx;
  slope_t raw_wsl, raw_rsl;
  cost_t vr_wd, vr_rd;

  assign fwd_start = bp_valid && bp_ready && bp_last;

  fwdt_pe #(.BP_N(BP_N)) u_fwdt (
    .clk, .rst_n, .start(fwd_start), .bank(wb),
    .in_valid(so_valid), .in_bp('{x: so_key, slopel: so_data[2*SLOPE_W-1:SLOPE_W], sloper: so_data[SLOPE_W-1:0]}),
    .in_last(so_last),
    .raw_we, .raw_wbank, .raw_wa, .raw_wx, .raw_wsl,
    .vr_we, .vr_wbank, .vr_wa, .vr_wd,
    .done(fwd_done), .nb(f_nb), .nq(f_nq)
  );

  bp_ram #(.BP_N(BP_N)) u_ram (
    .clk, .raw_we, .raw_wbank, .raw_wa, .raw_wx, .raw_wsl, .raw_rbank, .raw_ra, .raw_rx, .raw_rsl,
    .vr_we, .vr_wbank, .vr_wa, .vr_wd, .vr_rbank, .vr_ra, .vr_rd
  );

  // ---------------- backward traversal ----------------
  typedef struct packed {
    logic            bank;
    logic [AW:0]     nb;
    logic [AW:0]     nq;
    coord_t          x_lo;
    coord_t          x_hi;
    logic [IP_W-1:0] id;
  } bwd_job_t;

  bwd_job_t pend, job;
  logic     pend_v, bwd_busy, bwd_start, bwd_bank_q;

  assign job       = pend_v ? pend : '{bank: ipf_bank, nb: f_nb, nq: f_nq, x_lo: ipf.x_lo, x_hi: ipf.x_hi, id: ipf.id};
  assign bwd_start = !bwd_busy && (pend_v || fwd_done);
  assign bank_conflict = (bwd_busy && (bwd_bank_q == wb)) || (pend_v && (pend.bank == wb))
                       || (fwd_act && (ipf_bank == wb));


  bwdt_pe #(.BP_N(BP_N)) u_bwdt (
    .clk, .rst_n, .start(bwd_start), .bank(job.bank), .nb(job.nb), .nq(job.nq),
    .x_lo(job.x_lo), .x_hi(job.x_hi), .id(job.id),
    .raw_rbank, .raw_ra, .raw_rx, .raw_rsl, .vr_rbank, .vr_ra, .vr_rd,
    .busy(bwd_busy), .res_valid, .res
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ip1 <= '0; ipf <= '0; ipf_bank <= 1'b0; wb <= 1'b0; fwd_act <= 1'b0;
      pend <= '0; pend_v <= 1'b0; bwd_bank_q <= 1'b0;
    end else begin
      if (accept) ip1 <= ip;
      if (fwd_start) begin
        ipf      <= ip1;
        ipf_bank <= wb;
        wb       <= ~wb;
        fwd_act  <= 1'b1;
      end
      if (fwd_done) fwd_act <= 1'b0;
      // a finished forward traversal waits here if the backward one is busy
      if (fwd_done && !bwd_start) begin
        pend   <= '{bank: ipf_bank, nb: f_nb, nq: f_nq, x_lo: ipf.x_lo, x_hi: ipf.x_hi, id: ipf.id};
        pend_v <= 1'b1;
      end else if (fwd_done && bwd_start && pend_v) begin
        pend   <= '{bank: ipf_bank, nb: f_nb, nq: f_nq, x_lo: ipf.x_lo, x_hi: ipf.x_hi, id: ipf.id};
      end else if (bwd_start && pend_v) begin
        pend_v <= 1'b0;
      end
      if (bwd_start) bwd_bank_q <= job.bank;
    end
  end

  assign busy = sacs_busy || col_busy || sort_busy || fwd_act || pend_v || bwd_busy;

  // the backward traversal never reads the bank being written
  a_bank_free: assert property (@(posedge clk) disable iff (!rst_n)
    (raw_we && bwd_busy) |-> (raw_wbank != bwd_bank_q));
endmodule
