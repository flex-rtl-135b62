// sacs_pe: Sort-Ahead Cell Shifting processing element.
//
// For one insertion point of the target cell it computes where every
// localCell ends up when the target is pushed into the gap: in the left-move
// phase the target sits at x_lo and cells on its left are pushed left; in the
// right-move phase it sits at x_hi and cells on its right are pushed right.
// Because the localCells are visited in x order (Cell_sort, built ahead by
// the Ahead Sorter), right to left for left-move and left to right for
// right-move, a cell's position is final when it is visited, so one pass
// resolves all overlaps and each position is streamed out at once.
//
// Per visited cell c (dataflow of the architecture):
//   Cs -> LCT       read the cell index from Cell_sort, then its features;
//   output          stream {phase, index, x, pos} (pos = posl or posr);
//   per row s of c  read CurSeg Table entry (CSP/CSE) of s; if the segment is
//                   not finished and LSC[s][CSP] is c, advance CSP (CSE when
//                   the segment end is passed); if c has moved and has a
//                   neighbour in s (LSC -> LCT), push the neighbour so it no
//                   longer overlaps c and write its position to LCPT.
// Before the loop the target itself pushes its neighbours in its own rows.
// The check "LSC[s][CSP] is c" skips cells lying on the far side of the gap
// in the target's rows; it is this design's way of excluding them.
//
// Memories local to the PE:
//   LCPT  localCells pos Table, two banks used by alternate insertion points;
//   CST   CurSeg Table, table A for left-move and table B for right-move.
// A background initialiser sets the idle LCPT bank to pos = x (reading the
// LCT copy port) and the idle CST table to "start at the segment end" while
// the other is in use, hiding initialisation as the ping-pong tables do.
// The target's rows are then overwritten at the start of each phase.
// One memory access per row and cycle; the double-rate memory clock and
// odd/even dual access of the original architecture are not built, and the
// two phases run one after the other.
//
// Interface: ip_valid/ip_ready hand over one insertion point (the target in
// `tgt` must stay stable until `done`); out_valid/out_ready stream one entry
// per localCell and phase, out_last marks the final entry of the right-move
// phase; `done` pulses when both phases are finished. `region_new` (only when
// idle) tells the PE that the active region changed.
//
// Lint notes: some fields of whole-struct ports are not used here (the
// target's gx, the descriptor id, the LCT copy port's fields other than x
// and the neighbour's LCT fields other than x and w); SEG_CELLS is accepted
// so every PE-level module takes the same size parameters, the cell lists
// themselves being sized in region_mem.
module sacs_pe
  import flex_pkg::*;
#(
  parameter int unsigned N_CELLS   = N_CELLS_DEF,
  parameter int unsigned N_SEGS    = N_SEGS_DEF,
  parameter int unsigned SEG_CELLS = SEG_CELLS_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        region_new,
  input  logic        ip_valid,
  output logic        ip_ready,
  input  ip_desc_t    ip,
  input  target_t     tgt,
  output logic        out_valid,
  input  logic        out_ready,
  output shift_out_t  out,
  output logic        out_last,
  output logic        done,
  output logic        busy,
  // region memory (active bank), synchronous reads
  output cidx_t       lct_ra,
  input  lct_entry_t  lct_rd,
  output cidx_t       lct2_ra,
  input  lct_entry_t  lct2_rd,
  output seg_t        lsc_rseg,
  output slot_t       lsc_rslot,
  input  cidx_t       lsc_rd,
  output seg_t        len_rseg,
  input  logic [INS_W-1:0] len_rd,
  output seg_t        len2_rseg,
  input  logic [INS_W-1:0] len2_rd,
  output cidx_t       cs_ra,
  input  cidx_t       cs_rd,
  input  logic [IDX_W:0] ncells,
  input  logic [SEG_W:0] nsegs
);

  // ------------------------------------------------------------------
  // local tables
  // ------------------------------------------------------------------
  lcpt_entry_t lcpt [2][N_CELLS];
  cst_entry_t  cst  [2][N_SEGS];

  logic [1:0] lcpt_ok;     // bank initialised and not yet used
  logic [1:0] cst_ok;      // table initialised and not yet used
  logic       lb;          // LCPT bank of the current insertion point

  // ------------------------------------------------------------------
  // background initialiser: LCPT (pos = x) and CST (segment end)
  // ------------------------------------------------------------------
  logic          li_run, li_v, li_bank;
  logic [IDX_W:0] li_cnt;
  cidx_t         li_idx;
  logic          ci_run, ci_v, ci_tab;
  logic [SEG_W:0] ci_cnt;
  seg_t          ci_seg;

  // ------------------------------------------------------------------
  // main FSM
  // ------------------------------------------------------------------
  typedef enum logic [3:0] {
    IDLE, P_START, TG_RD, TG_NB, TG_PUSH,
    C_FETCH, C_LCT, C_OUT, R_CST, R_LSC, R_CHK, R_NB, R_PUSH
  } state_e;
  state_e state;

  ip_desc_t   ipq;
  logic       ph;                      // 0 left-move, 1 right-move
  logic [2:0] t;                       // target row counter
  logic [IDX_W:0] k;                   // Cell_sort position
  cidx_t      cur_idx;
  coord_t     cur_pos;
  logic [19:0] cur_w;
  seg_t       cur_row;
  logic [11:0] row_cnt;
  logic       moved;
  cst_entry_t cst_q;
  logic [INS_W-1:0] len_q;
  cidx_t      nb_idx;

  // synchronous reads of the local tables
  cidx_t       lcpt_ra;
  lcpt_entry_t lcpt_rd;
  seg_t        cst_ra;
  cst_entry_t  cst_rd;
  always_ff @(posedge clk) begin
    lcpt_rd <= lcpt[lb][lcpt_ra];
    cst_rd  <= cst[ph][cst_ra];
  end

  // target-row helpers
  seg_t             tg_row;
  logic [INS_W-1:0] tg_ins;
  assign tg_row = ipq.row0 + seg_t'(t);
  assign tg_ins = ipq.ins[t[1:0]];

  // a pushed neighbour's new position
  lct_entry_t  nb_f;
  lcpt_entry_t nb_p, nb_p_new;
  coord_t      pusher_pos;
  logic [19:0] pusher_w;
  logic        nb_overlap;
  always_comb begin
    nb_f = lct_rd;
    nb_p = lcpt_rd;
    nb_p_new = nb_p;
    if (!ph) begin
      nb_overlap = (nb_p.posl + coord_t'(nb_f.w)) > pusher_pos;
      if (nb_overlap) nb_p_new.posl = pusher_pos - coord_t'(nb_f.w);
    end else begin
      nb_overlap = (pusher_pos + coord_t'(pusher_w)) > nb_p.posr;
      if (nb_overlap) nb_p_new.posr = pusher_pos + coord_t'(pusher_w);
    end
  end
  always_comb begin
    if (state == TG_PUSH) begin
      pusher_pos = ph ? ipq.x_hi : ipq.x_lo;
      pusher_w   = tgt.w;
    end else begin
      pusher_pos = cur_pos;
      pusher_w   = cur_w;
    end
  end

  logic [IDX_W:0] k_first, k_last;
  assign k_first = ph ? '0 : ncells - 1'b1;
  assign k_last  = ph ? ncells - 1'b1 : '0;

  // next CST value when the current cell passes segment `cur_row`
  cst_entry_t cst_adv;
  logic       nb_exists;
  slot_t      nb_slot;
  always_comb begin
    cst_adv = cst_q;
    if (!ph) begin
      cst_adv.cse = (cst_q.csp == '0);
      cst_adv.csp = (cst_q.csp == '0) ? '0 : cst_q.csp - 1'b1;
      nb_exists   = (cst_q.csp != '0);
      nb_slot     = cst_q.csp - 1'b1;
    end else begin
      cst_adv.cse = ({1'b0, cst_q.csp} + 1'b1 >= len_q);
      cst_adv.csp = cst_q.csp + 1'b1;
      nb_exists   = ({1'b0, cst_q.csp} + 1'b1 < len_q);
      nb_slot     = cst_q.csp + 1'b1;
    end
  end

  // initial CST entry of a target row
  cst_entry_t cst_tg;
  always_comb begin
    if (!ph) begin
      cst_tg.csp = slot_t'(tg_ins - 1'b1);
      cst_tg.cse = (tg_ins == '0);
    end else begin
      cst_tg.csp = slot_t'(tg_ins);
      cst_tg.cse = (tg_ins >= len_rd);
    end
  end

  // ------------------------------------------------------------------
  // memory address muxes
  // ------------------------------------------------------------------
  always_comb begin
    cs_ra     = cidx_t'(k);
    lct_ra    = cs_rd;
    lcpt_ra   = cs_rd;
    lsc_rseg  = cur_row;
    lsc_rslot = cst_rd.csp;
    len_rseg  = cur_row;
    cst_ra    = cur_row;
    unique case (state)
      TG_RD: begin
        lsc_rseg  = tg_row;
        lsc_rslot = ph ? slot_t'(tg_ins) : slot_t'(tg_ins - 1'b1);
        len_rseg  = tg_row;
      end
      TG_NB: begin
        lct_ra  = lsc_rd;
        lcpt_ra = lsc_rd;
      end
      R_CHK: begin
        lsc_rslot = nb_slot;
      end
      R_NB: begin
        lct_ra  = lsc_rd;
        lcpt_ra = lsc_rd;
      end
      default: ;
    endcase
  end

  assign out_valid = (state == C_OUT);
  // in C_OUT the LCT / LCPT entries of the visited cell are on the read ports
  // (their addresses stay put while the stream is stalled)
  coord_t vis_pos;
  assign vis_pos   = ph ? lcpt_rd.posr : lcpt_rd.posl;
  assign out       = '{right: ph, idx: cur_idx, x: lct_rd.x, pos: vis_pos};
  assign out_last  = (state == C_OUT) && ph && (k == k_last);
  assign ip_ready  = (state == IDLE) && lcpt_ok[lb] && cst_ok[0] && !region_new;
  assign busy      = (state != IDLE);

  // which tables are in use right now
  logic cst_busy0, cst_busy1;
  assign cst_busy0 = (state != IDLE) && !ph;
  assign cst_busy1 = (state != IDLE) && ph;

  // the FSM leaves a row in these situations
  function automatic logic next_row_taken();
    unique case (state)
      R_LSC:  return cst_rd.cse;
      R_CHK:  return (lsc_rd != cur_idx) || !(moved && nb_exists);
      R_PUSH: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      lcpt_ok <= '0;
      cst_ok  <= '0;
      lb      <= 1'b0;
      ph      <= 1'b0;
      done    <= 1'b0;
      li_run  <= 1'b0; li_v <= 1'b0; li_cnt <= '0; li_bank <= 1'b0; li_idx <= '0;
      ci_run  <= 1'b0; ci_v <= 1'b0; ci_cnt <= '0; ci_tab <= 1'b0; ci_seg <= '0;
      t <= '0; k <= '0; cur_idx <= '0; cur_pos <= '0; cur_w <= '0;
      cur_row <= '0; row_cnt <= '0; moved <= 1'b0; cst_q <= '0; len_q <= '0;
      nb_idx <= '0; ipq <= '0;
    end else begin
      done <= 1'b0;

      // ---------------- LCPT initialiser ----------------
      li_v <= 1'b0;
      if (!li_run) begin
        if (!region_new && !lcpt_ok[~lb]) begin
          li_run <= 1'b1; li_bank <= ~lb; li_cnt <= '0;
        end else if (!region_new && !lcpt_ok[lb] && state == IDLE) begin
          li_run <= 1'b1; li_bank <= lb; li_cnt <= '0;
        end
      end else begin
        if (li_cnt < ncells) begin
          li_idx <= cidx_t'(li_cnt);
          li_v   <= 1'b1;
          li_cnt <= li_cnt + 1'b1;
        end else if (!li_v) begin
          li_run <= 1'b0;
          lcpt_ok[li_bank] <= 1'b1;
        end
      end
      if (li_v) lcpt[li_bank][li_idx] <= '{posl: lct2_rd.x, posr: lct2_rd.x};

      // ---------------- CST initialiser ----------------
      ci_v <= 1'b0;
      if (!ci_run) begin
        if (!region_new && !cst_ok[0] && !cst_busy0) begin
          ci_run <= 1'b1; ci_tab <= 1'b0; ci_cnt <= '0;
        end else if (!region_new && !cst_ok[1] && !cst_busy1) begin
          ci_run <= 1'b1; ci_tab <= 1'b1; ci_cnt <= '0;
        end
      end else begin
        if (ci_cnt < nsegs) begin
          ci_seg <= seg_t'(ci_cnt);
          ci_v   <= 1'b1;
          ci_cnt <= ci_cnt + 1'b1;
        end else if (!ci_v) begin
          ci_run <= 1'b0;
          cst_ok[ci_tab] <= 1'b1;
        end
      end
      if (ci_v) begin
        if (!ci_tab) cst[0][ci_seg] <= '{csp: slot_t'(len2_rd - 1'b1), cse: (len2_rd == '0)};
        else         cst[1][ci_seg] <= '{csp: '0,                      cse: (len2_rd == '0)};
      end

      // ---------------- main FSM ----------------
      unique case (state)
        IDLE: begin
          if (region_new) begin
            lcpt_ok <= '0;
            cst_ok  <= '0;
            li_run  <= 1'b0;
            ci_run  <= 1'b0;
            li_v    <= 1'b0;
            ci_v    <= 1'b0;
          end else if (ip_valid && ip_ready) begin
            ipq   <= ip;
            ph    <= 1'b0;
            state <= P_START;
          end
        end
        P_START: if (cst_ok[ph]) begin
          t     <= '0;
          state <= TG_RD;
        end
        TG_RD: state <= TG_NB;            // len and LSC neighbour in flight
        TG_NB: begin
          cst[ph][tg_row] <= cst_tg;
          if (ph ? (tg_ins < len_rd) : (tg_ins != '0)) begin
            state <= TG_PUSH;             // neighbour features in flight
          end else if (3'(t + 1'b1) == 3'(tgt.h)) begin
            k     <= k_first;
            state <= C_FETCH;
          end else begin
            t     <= t + 1'b1;
            state <= TG_RD;
          end
        end
        TG_PUSH: begin
          lcpt[lb][nb_idx] <= nb_p_new;
          if (3'(t + 1'b1) == 3'(tgt.h)) begin
            k     <= k_first;
            state <= C_FETCH;
          end else begin
            t     <= t + 1'b1;
            state <= TG_RD;
          end
        end
        C_FETCH: state <= C_LCT;          // Cs read in flight
        C_LCT: begin
          cur_idx <= cs_rd;               // LCT / LCPT read in flight
          state   <= C_OUT;
        end
        C_OUT: begin
          cur_w   <= lct_rd.w;
          cur_row <= seg_t'(lct_rd.y);
          row_cnt <= lct_rd.h;
          cur_pos <= vis_pos;
          moved   <= vis_pos != lct_rd.x;
          if (out_ready) state <= R_CST;
        end
        R_CST: state <= R_LSC;            // CST and length in flight
        R_LSC: begin
          cst_q <= cst_rd;
          len_q <= len_rd;
          if (cst_rd.cse) state <= R_CST;
          else            state <= R_CHK; // LSC[s][CSP] in flight
        end
        R_CHK: begin
          if (lsc_rd != cur_idx) begin
            state <= R_CST;
          end else begin
            cst[ph][cur_row] <= cst_adv;
            if (moved && nb_exists) state <= R_NB;   // neighbour index in flight
            else                    state <= R_CST;
          end
        end
        R_NB: begin
          nb_idx <= lsc_rd;               // neighbour features in flight
          state  <= R_PUSH;
        end
        R_PUSH: begin
          lcpt[lb][nb_idx] <= nb_p_new;
          state <= R_CST;
        end
        default: state <= IDLE;
      endcase

      // row / cell / phase sequencing
      if (next_row_taken()) begin
        if (row_cnt > 12'd1) begin
          row_cnt <= row_cnt - 1'b1;
          cur_row <= cur_row + 1'b1;
        end else if (k != k_last) begin
          k     <= ph ? k + 1'b1 : k - 1'b1;
          state <= C_FETCH;
        end else if (!ph) begin
          cst_ok[0] <= 1'b0;
          ph        <= 1'b1;
          state     <= P_START;
        end else begin
          cst_ok[1]   <= 1'b0;
          lcpt_ok[lb] <= 1'b0;
          lb          <= ~lb;
          ph          <= 1'b0;
          done        <= 1'b1;
          state       <= IDLE;
        end
      end
      if (state == TG_NB) nb_idx <= lsc_rd;
    end
  end


  // the LCPT initialiser reads the LCT copy port, the CST one the 2nd length port
  assign lct2_ra   = cidx_t'(li_cnt);
  assign len2_rseg = seg_t'(ci_cnt);

endmodule
