// flex_top: FLEX FPGA accelerator for the FOP step of mixed-cell-height
// legalization.
//
// Contains the controller, the Insertion Point RAM, the Insertion Point
// Module and the FOP PEs Cluster (N_PE FOP PEs, shared Ahead Sorter,
// Synchronization Module), as in the paper's architecture overview. The
// CPU and DDR are outside: the host side is a single command stream
// (cmd_valid/cmd_ready/cmd) and a result strobe (rsp_valid/rsp) giving, per
// target cell, the lowest displacement cost, its x and the insertion point.
// Typical use per localRegion: WR_LCT/WR_LSC/WR_SEGLEN for every cell and
// segment, SORT, SWAP; then per target: TARGET, WR_IP for each insertion
// point, START, wait for rsp_valid. The next region can be loaded and
// sorted while the current one is in use.
// The paper's double-rate memory clock (F = 2f) is not modelled: one clock.
//
// Lint note: rst_n is an asynchronous reset for all flops; it also appears
// in the `disable iff` of the simulation-only assertions, which a linter
// reports as a reset used both synchronously and asynchronously.
module flex_top
  import flex_pkg::*;
#(
  parameter int unsigned N_PE      = 2,
  parameter int unsigned N_CELLS   = N_CELLS_DEF,
  parameter int unsigned N_SEGS    = N_SEGS_DEF,
  parameter int unsigned SEG_CELLS = SEG_CELLS_DEF,
  parameter int unsigned N_IP      = N_IP_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  host_cmd_t   cmd,
  output logic        rsp_valid,
  output fop_result_t rsp
);
  logic        swap, lct_we, lsc_we, len_we, sort_go, sort_ready, sort_busy, pe_busy;
  cidx_t       lct_wa, lsc_wd;
  lct_entry_t  lct_wd;
  seg_t        lsc_wseg, len_wseg;
  slot_t       lsc_wslot;
  logic [INS_W-1:0] len_wd;
  logic [IDX_W:0] sort_ncells;
  logic [SEG_W:0] sort_nsegs;
  target_t     tgt;
  logic        ipw_we, clear, ip_start, ip_done, ip_running;
  logic [$clog2(N_IP)-1:0] ipw_addr, ip_raddr;
  ip_desc_t    ipw_data, ip_rdata, pe_ip;
  logic [$clog2(N_IP):0] ip_num;
  logic        pe_valid [N_PE];
  logic        pe_ready [N_PE];
  logic        res_valid [N_PE];
  logic        best_valid;
  fop_result_t best;

  controller #(.N_IP(N_IP)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp,
    .swap, .lct_we, .lct_wa, .lct_wd, .lsc_we, .lsc_wseg, .lsc_wslot, .lsc_wd,
    .len_we, .len_wseg, .len_wd, .sort_go, .sort_ncells, .sort_nsegs,
    .sort_ready, .sort_busy, .pe_busy,
    .tgt, .ipw_we, .ipw_addr, .ipw_data, .clear, .ip_start, .ip_num, .ip_done, .best
  );

  ip_ram #(.N_IP(N_IP)) u_ipram (
    .clk, .we(ipw_we), .waddr(ipw_addr), .wdata(ipw_data), .raddr(ip_raddr), .rdata(ip_rdata)
  );

  ip_module #(.N_PE(N_PE), .N_IP(N_IP)) u_ipm (
    .clk, .rst_n, .start(ip_start), .num_ip(ip_num), .raddr(ip_raddr), .rdata(ip_rdata),
    .pe_valid, .pe_ready, .pe_ip, .res_valid, .running(ip_running), .done(ip_done)
  );

  fop_cluster #(.N_PE(N_PE), .N_CELLS(N_CELLS), .N_SEGS(N_SEGS), .SEG_CELLS(SEG_CELLS)) u_cluster (
    .clk, .rst_n, .swap,
    .lct_we, .lct_wa, .lct_wd, .lsc_we, .lsc_wseg, .lsc_wslot, .lsc_wd,
    .len_we, .len_wseg, .len_wd,
    .sort_go, .sort_ncells, .sort_nsegs, .sort_ready, .sort_busy,
    .tgt, .ip_valid(pe_valid), .ip_ready(pe_ready), .ip(pe_ip), .res_valid,
    .clear, .best_valid, .best, .busy(pe_busy)
  );

`ifndef SYNTHESIS
  // a finished target always has a result
  a_rsp_has_best: assert property (@(posedge clk) disable iff (!rst_n)
                                   ip_done && !ip_running |-> best_valid || ip_num == '0);
`endif
endmodule
