// flex_pkg: types and constants shared by the FLEX FOP accelerator.
//
// The accelerator evaluates insertion points for one target cell of a
// mixed-cell-height legalizer. The table layouts follow the memory map of the
// SACS architecture: a localCells Table (LCT) entry is 100 bits
// {x[99:68], y[67:36], w[35:16], h[15:4], f[3:0]}, a localCells pos Table
// (LCPT) entry is 64 bits {posl[63:32], posr[31:0]}, a CurSeg Table (CST)
// entry is 9 bits {csp[8:1], cse[0]}, and Cell_sort / localSegment Cell List
// entries are 11-bit cell indices. Region capacity is 2048 localCells and 256
// localSegments of up to 256 cells each.
//
// The descriptor, breakpoint, result and host command formats below are this
// design's own choices.
package flex_pkg;

  // ---- region capacity (paper sizes) ----
  localparam int unsigned N_CELLS_DEF   = 2048;
  localparam int unsigned N_SEGS_DEF    = 256;
  localparam int unsigned SEG_CELLS_DEF = 256;
  localparam int unsigned N_IP_DEF      = 512;   // insertion points per target (own choice)
  localparam int unsigned TH_MAX        = 4;     // tallest target cell in rows (own choice)

  localparam int unsigned IDX_W  = 11;           // cell index width
  localparam int unsigned SEG_W  = 8;            // localSegment (row) index width
  localparam int unsigned SLOT_W = 8;            // position inside a segment cell list
  localparam int unsigned INS_W  = SLOT_W + 1;   // interval index 0..SEG_CELLS
  localparam int unsigned IP_W   = 9;            // insertion point number
  localparam int unsigned SLOPE_W = 16;
  localparam int unsigned COST_W  = 64;

  typedef logic signed [31:0]        coord_t;
  typedef logic [IDX_W-1:0]          cidx_t;
  typedef logic [SEG_W-1:0]          seg_t;
  typedef logic [SLOT_W-1:0]         slot_t;
  typedef logic [SLOPE_W-1:0]        slope_t;
  typedef logic signed [COST_W-1:0]  cost_t;

  // localCells Table entry, 100 bits
  typedef struct packed {
    coord_t      x;   // current (pre-moved) x in sites
    logic [31:0] y;   // bottom row inside the localRegion
    logic [19:0] w;   // width in sites
    logic [11:0] h;   // height in rows
    logic [3:0]  f;   // feature flags, carried but not interpreted
  } lct_entry_t;

  // localCells pos Table entry, 64 bits
  typedef struct packed {
    coord_t posl;
    coord_t posr;
  } lcpt_entry_t;

  // CurSeg Table entry, 9 bits
  typedef struct packed {
    slot_t csp;       // next cell (slot) of the segment to process
    logic  cse;       // all cells of the segment processed
  } cst_entry_t;

  // the cell being inserted
  typedef struct packed {
    logic [19:0] w;
    logic [3:0]  h;   // 1..TH_MAX
    coord_t      gx;  // global-placement x of the target
  } target_t;

  // one insertion point: a bottom row and, per target row, the interval
  // index (number of cells of that row left of the gap); the target may sit
  // anywhere in [x_lo, x_hi].
  typedef struct packed {
    logic [IP_W-1:0]              id;
    seg_t                         row0;
    coord_t                       x_lo;
    coord_t                       x_hi;
    logic [TH_MAX-1:0][INS_W-1:0] ins;
  } ip_desc_t;

  // SACS output stream: final position of one localCell in one phase
  typedef struct packed {
    logic   right;    // 0: left-move (pos = posl), 1: right-move (pos = posr)
    cidx_t  idx;
    coord_t x;
    coord_t pos;
  } shift_out_t;

  // breakpoint of a piecewise-linear displacement curve
  typedef struct packed {
    coord_t x;
    slope_t slopel;   // |slope| of the curve left of x
    slope_t sloper;   // slope of the curve right of x
  } bp_t;

  typedef struct packed {
    cost_t           cost;   // total displacement at the best x
    coord_t          x;      // best target x
    logic [IP_W-1:0] id;     // insertion point it belongs to
  } fop_result_t;

  // host command port
  typedef enum logic [3:0] {
    CMD_NOP      = 4'd0,
    CMD_WR_LCT   = 4'd1,   // addr = cell index, data[99:0] = lct_entry_t
    CMD_WR_LSC   = 4'd2,   // addr = {seg, slot}, data[10:0] = cell index
    CMD_WR_SEGLEN= 4'd3,   // addr = seg, data[8:0] = number of cells
    CMD_SORT     = 4'd4,   // addr = ncells, data[8:0] = nsegs; sorts the idle region
    CMD_SWAP     = 4'd5,   // make the idle region active
    CMD_WR_IP    = 4'd6,   // addr = slot in IP RAM, data = ip_desc_t
    CMD_TARGET   = 4'd7,   // data = target_t
    CMD_START    = 4'd8    // addr = number of insertion points
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e      op;
    logic [31:0]  addr;
    logic [127:0] data;
  } host_cmd_t;

  function automatic coord_t cmin(coord_t a, coord_t b);
    return (a < b) ? a : b;
  endfunction
  function automatic coord_t cmax(coord_t a, coord_t b);
    return (a > b) ? a : b;
  endfunction

endpackage
