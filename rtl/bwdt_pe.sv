// bwdt_pe: backward traversal of the breakpoints (bwdtraverse).
//
// Reads the raw breakpoints of one insertion point from bp_ram from the
// largest x down, one per cycle, and runs fused:
//   bwdmerge        breakpoints with equal x form merged breakpoint p;
//   sum slopesL     slopesL[p] = slopesL[p+1] + left slope of p;
//   calculate vL    vL[p-1] = vL[p] + slopesL[p] * (x[p] - x[p-1]), vL[last] = 0;
//   calculate v     v[p] = vL[p] + vR[p] (vR from the forward traversal);
// and keeps the smallest v among merged breakpoints with x_lo <= x <= x_hi
// (vMin) and its x (placeX). The total displacement is convex and piecewise
// linear, so its minimum over [x_lo, x_hi] lies on one of them. On equal
// values the first one found, i.e. the largest x, is kept (own choice).
//
// Timing: `start` with bank, nb, nq, x_lo, x_hi and id; the result appears on
// res_valid about nb + 4 cycles later. vR[p] is read in the cycle p is
// closed and added one cycle later.
module bwdt_pe
  import flex_pkg::*;
#(
  parameter int unsigned BP_N = 2 * N_CELLS_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        bank,
  input  logic [$clog2(BP_N):0] nb,
  input  logic [$clog2(BP_N):0] nq,
  input  coord_t      x_lo,
  input  coord_t      x_hi,
  input  logic [IP_W-1:0] id,
  output logic        raw_rbank,
  output logic [$clog2(BP_N)-1:0] raw_ra,
  input  coord_t      raw_rx,
  input  slope_t      raw_rsl,
  output logic        vr_rbank,
  output logic [$clog2(BP_N)-1:0] vr_ra,
  input  cost_t       vr_rd,
  output logic        busy,
  output logic        res_valid,
  output fop_result_t res
);
  localparam int unsigned AW = $clog2(BP_N);

  typedef enum logic [1:0] {IDLE, RUN, FIN, CMP} state_e;
  state_e state;

  logic        bank_q, d_v, have;
  logic [AW:0] ia, p;
  coord_t      lo_q, hi_q, cur_x;
  logic [IP_W-1:0] id_q;
  slope_t      cur_sl, slopes_l;      // open merged bp, slopesL[p+1]
  cost_t       vl_cur;                // vL of the open merged bp
  // compare stage
  logic        s_v;
  coord_t      s_x;
  cost_t       s_vl;
  cost_t       best;
  coord_t      best_x;
  logic        best_ok;

  slope_t slopes_l_p;
  assign slopes_l_p = slopes_l + cur_sl;            // slopesL[p]

  logic closing;
  assign closing = (d_v && have && (raw_rx != cur_x)) || ((state == FIN) && !d_v);

  assign raw_rbank = bank_q;
  assign raw_ra    = ia[AW-1:0];
  assign vr_rbank  = bank_q;
  assign vr_ra     = p[AW-1:0];
  assign busy      = (state != IDLE);

  cost_t v_now;
  assign v_now = s_vl + vr_rd;                       // calculate v

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; bank_q <= 1'b0; d_v <= 1'b0; have <= 1'b0; ia <= '0; p <= '0;
      lo_q <= '0; hi_q <= '0; cur_x <= '0; id_q <= '0; cur_sl <= '0; slopes_l <= '0; vl_cur <= '0;
      s_v <= 1'b0; s_x <= '0; s_vl <= '0; best <= '0; best_x <= '0; best_ok <= 1'b0;
      res_valid <= 1'b0; res <= '0;
    end else begin
      res_valid <= 1'b0;
      s_v <= 1'b0;
      // compare stage: v of the merged bp closed last cycle
      if (s_v && (s_x >= lo_q) && (s_x <= hi_q) && (!best_ok || v_now < best)) begin
        best    <= v_now;                            // vMin
        best_x  <= s_x;                              // placeX
        best_ok <= 1'b1;
      end
      // close merged bp p
      if (closing) begin
        s_v  <= 1'b1;
        s_x  <= cur_x;
        s_vl <= vl_cur;
        p    <= p - 1'b1;
      end
      // consume one raw breakpoint
      if (d_v) begin
        if (!have) begin
          have   <= 1'b1;
          cur_x  <= raw_rx;
          cur_sl <= raw_rsl;
        end else if (raw_rx == cur_x) begin
          cur_sl <= cur_sl + raw_rsl;                                         // bwdmerge
        end else begin
          slopes_l <= slopes_l_p;                                             // sum slopesL
          vl_cur   <= vl_cur + cost_t'(slopes_l_p) * (cost_t'(cur_x) - cost_t'(raw_rx)); // calculate vL
          cur_x    <= raw_rx;
          cur_sl   <= raw_rsl;
        end
      end
      d_v <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          bank_q <= bank; lo_q <= x_lo; hi_q <= x_hi; id_q <= id;
          ia <= nb - 1'b1; p <= nq - 1'b1;
          have <= 1'b0; slopes_l <= '0; vl_cur <= '0; best_ok <= 1'b0;
          state <= RUN;
        end
        RUN: begin
          d_v <= 1'b1;                               // raw[ia] arrives next cycle
          if (ia == '0) state <= FIN;
          else          ia <= ia - 1'b1;
        end
        FIN: if (!d_v) state <= CMP;                 // waits for the last raw bp
        CMP: if (!s_v) begin
          res_valid <= 1'b1;
          res       <= '{cost: best, x: best_x, id: id_q};
          state     <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
