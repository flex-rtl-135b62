// fwdt_pe: forward traversal of the sorted breakpoints (fwdtraverse).
//
// Three operations of the optimised FOP loop run fused on the breakpoint
// stream, one breakpoint per cycle:
//   fwdmerge        breakpoints with equal x form one merged breakpoint q;
//   sum slopesR     slopesR[q] = slopesR[q-1] + right slope of q;
//   calculate vR    vR[q+1] = vR[q] + slopesR[q] * (x[q+1] - x[q]), vR[0] = 0,
// so vR[q] is the sum of all right-side curves evaluated at x[q]. Every raw
// breakpoint (x, left slope) and every vR[q] is written to bp_ram for the
// backward traversal.
//
// Interface: `start` selects the bank and clears the counters; the sorted
// stream arrives on in_valid with in_last on the final breakpoint (no
// back-pressure). `done` pulses one cycle after the last one, with nb (raw
// breakpoints) and nq (merged breakpoints).
module fwdt_pe
  import flex_pkg::*;
#(
  parameter int unsigned BP_N = 2 * N_CELLS_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        bank,
  input  logic        in_valid,
  input  bp_t         in_bp,
  input  logic        in_last,
  output logic        raw_we,
  output logic        raw_wbank,
  output logic [$clog2(BP_N)-1:0] raw_wa,
  output coord_t      raw_wx,
  output slope_t      raw_wsl,
  output logic        vr_we,
  output logic        vr_wbank,
  output logic [$clog2(BP_N)-1:0] vr_wa,
  output cost_t       vr_wd,
  output logic        done,
  output logic [$clog2(BP_N):0] nb,
  output logic [$clog2(BP_N):0] nq
);
  localparam int unsigned AW = $clog2(BP_N);

  logic   bank_q, have, fin;
  coord_t cur_x;
  slope_t cur_sr, slopes_r;       // right slope of open merged bp, slopesR[q-1]
  cost_t  vr_cur;                 // vR of the open merged bp
  logic [AW:0] nb_q, q;

  slope_t slopes_r_q;
  assign slopes_r_q = slopes_r + cur_sr;       // slopesR[q]

  always_comb begin
    raw_we    = in_valid;
    raw_wbank = bank_q;
    raw_wa    = nb_q[AW-1:0];
    raw_wx    = in_bp.x;
    raw_wsl   = in_bp.slopel;
    // vR of a merged breakpoint is written when it is closed
    vr_we     = (in_valid && have && (in_bp.x != cur_x)) || fin;
    vr_wbank  = bank_q;
    vr_wa     = q[AW-1:0];
    vr_wd     = vr_cur;
  end

  assign nb = nb_q;
  assign nq = q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_q <= 1'b0; have <= 1'b0; fin <= 1'b0; done <= 1'b0;
      cur_x <= '0; cur_sr <= '0; slopes_r <= '0; vr_cur <= '0; nb_q <= '0; q <= '0;
    end else begin
      done <= 1'b0;
      fin  <= 1'b0;
      if (start) begin
        bank_q   <= bank;
        have     <= 1'b0;
        nb_q     <= '0;
        q        <= '0;
        slopes_r <= '0;
        vr_cur   <= '0;
      end else if (in_valid) begin
        nb_q <= nb_q + 1'b1;
        if (!have) begin
          have   <= 1'b1;
          cur_x  <= in_bp.x;
          cur_sr <= in_bp.sloper;
        end else if (in_bp.x == cur_x) begin
          cur_sr <= cur_sr + in_bp.sloper;                      // fwdmerge
        end else begin
          q        <= q + 1'b1;
          slopes_r <= slopes_r_q;                               // sum slopesR
          vr_cur   <= vr_cur + cost_t'(slopes_r_q) * (cost_t'(in_bp.x) - cost_t'(cur_x));  // calculate vR
          cur_x    <= in_bp.x;
          cur_sr   <= in_bp.sloper;
        end
        if (in_last) fin <= 1'b1;
      end else if (fin) begin
        q    <= q + 1'b1;                                       // last merged bp written
        done <= 1'b1;
      end
    end
  end
endmodule
