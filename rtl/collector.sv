// collector: turns the SACS position stream into displacement breakpoints.
//
// Each localCell has a piecewise-linear displacement curve in the target
// position xt. A cell pushed in the left-move phase (target at x_lo, new
// position posl) moves by max(0, bp - xt) with bp = x + x_lo - posl, so it
// gives a breakpoint with left slope 1. A cell pushed in the right-move
// phase (target at x_hi, position posr) moves by max(0, xt - bp) with
// bp = x + x_hi - posr, a breakpoint with right slope 1. Cells that were not
// pushed have no breakpoint inside [x_lo, x_hi]. The collector adds x_lo and
// x_hi as zero-slope breakpoints (so the minimum is looked for only at or
// inside the ends) and, after the stream, the target's own curve
// |xt - gx| as a breakpoint with both slopes 1, flagged bp_last.
// These formulas are this design's; displacement is counted from each cell's
// current position and is not weighted by cell height.
//
// Timing: `start` (with x_lo, x_hi, gx stable until the end of the stream)
// emits the two range ends in two cycles; then one stream entry per cycle
// is consumed, passing pushed cells on with bp_valid/bp_ready back-pressure;
// the entry with in_last is followed by the target breakpoint.
//
// Lint note: the cell index in the position stream is not needed to form a
// breakpoint and is left unused.
module collector
  import flex_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  coord_t      x_lo,
  input  coord_t      x_hi,
  input  coord_t      gx,
  input  logic        in_valid,
  output logic        in_ready,
  input  shift_out_t  in,
  input  logic        in_last,
  output logic        bp_valid,
  input  logic        bp_ready,
  output bp_t         bp,
  output logic        bp_last,
  output logic        busy
);
  typedef enum logic [2:0] {IDLE, HEAD0, HEAD1, STREAM, TAIL} state_e;
  state_e state;

  logic pushed;
  assign pushed = (in.pos != in.x);

  always_comb begin
    bp_valid = 1'b0;
    bp_last  = 1'b0;
    in_ready = 1'b0;
    bp       = '{x: x_lo, slopel: '0, sloper: '0};
    unique case (state)
      HEAD0: bp_valid = 1'b1;
      HEAD1: begin
        bp_valid = 1'b1;
        bp.x     = x_hi;
      end
      STREAM: begin
        in_ready = pushed ? bp_ready : 1'b1;
        bp_valid = in_valid && pushed;
        if (in.right) bp = '{x: in.x + x_hi - in.pos, slopel: '0, sloper: slope_t'(1)};
        else          bp = '{x: in.x + x_lo - in.pos, slopel: slope_t'(1), sloper: '0};
      end
      TAIL: begin
        bp_valid = 1'b1;
        bp_last  = 1'b1;
        bp       = '{x: gx, slopel: slope_t'(1), sloper: slope_t'(1)};
      end
      default: ;
    endcase
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= IDLE;
    else unique case (state)
      IDLE:   if (start) state <= HEAD0;
      HEAD0:  if (bp_ready) state <= HEAD1;
      HEAD1:  if (bp_ready) state <= STREAM;
      STREAM: if (in_valid && in_ready && in_last) state <= TAIL;
      TAIL:   if (bp_ready) state <= IDLE;
      default: state <= IDLE;
    endcase
  end
endmodule
