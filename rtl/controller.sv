// controller: host command decoder of FLEX.
//
// The host (CPU) drives one command per handshake (cmd_valid/cmd_ready,
// host_cmd_t, encoding in flex_pkg). The controller turns commands into
// the write strobes of the idle region (LCT, LSC, segment lengths), starts
// the Ahead Sorter (CMD_SORT with the cell/segment counts), swaps regions,
// fills the insertion point RAM, latches the target cell, and on CMD_START
// clears the Synchronization Module and starts the Insertion Point Module.
// When all insertion points have returned, it sends the best (cost, x,
// insertion point) on rsp_valid/rsp for one cycle.
// Paper: the FPGA receives data from DDR and "the CPU ... sends the
// localRegion data and the target cell"; the command set and its encoding
// are this design's choice (the paper gives no host interface).
// Timing: cmd_ready is combinational; commands that need the sorter wait
// for sort_ready, CMD_SWAP waits for the sorter and the PEs to be idle, and
// target/insertion-point commands wait while a target is being evaluated.
module controller
  import flex_pkg::*;
#(
  parameter int unsigned N_IP = N_IP_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  host_cmd_t   cmd,
  output logic        rsp_valid,
  output fop_result_t rsp,
  // region loading
  output logic        swap,
  output logic        lct_we,
  output cidx_t       lct_wa,
  output lct_entry_t  lct_wd,
  output logic        lsc_we,
  output seg_t        lsc_wseg,
  output slot_t       lsc_wslot,
  output cidx_t       lsc_wd,
  output logic        len_we,
  output seg_t        len_wseg,
  output logic [INS_W-1:0] len_wd,
  output logic        sort_go,
  output logic [IDX_W:0] sort_ncells,
  output logic [SEG_W:0] sort_nsegs,
  input  logic        sort_ready,
  input  logic        sort_busy,
  input  logic        pe_busy,
  // target and insertion points
  output target_t     tgt,
  output logic        ipw_we,
  output logic [$clog2(N_IP)-1:0] ipw_addr,
  output ip_desc_t    ipw_data,
  output logic        clear,
  output logic        ip_start,
  output logic [$clog2(N_IP):0] ip_num,
  input  logic        ip_done,
  input  fop_result_t best
);
  logic running;
  logic fire;

  always_comb begin
    unique case (cmd.op)
      CMD_WR_LCT, CMD_SORT:         cmd_ready = sort_ready;
      CMD_SWAP:                     cmd_ready = !sort_busy && !pe_busy && !running;
      CMD_WR_IP, CMD_TARGET, CMD_START: cmd_ready = !running;
      default:                      cmd_ready = 1'b1;
    endcase
  end
  assign fire = cmd_valid && cmd_ready;

  // write strobes and their data (combinational from the command)
  assign lct_we    = fire && cmd.op == CMD_WR_LCT;
  assign lct_wa    = cmd.addr[IDX_W-1:0];
  assign lct_wd    = cmd.data[$bits(lct_entry_t)-1:0];
  assign lsc_we    = fire && cmd.op == CMD_WR_LSC;
  assign lsc_wseg  = cmd.addr[SLOT_W +: SEG_W];
  assign lsc_wslot = cmd.addr[SLOT_W-1:0];
  assign lsc_wd    = cmd.data[IDX_W-1:0];
  assign len_we    = fire && cmd.op == CMD_WR_SEGLEN;
  assign len_wseg  = cmd.addr[SEG_W-1:0];
  assign len_wd    = cmd.data[INS_W-1:0];
  assign sort_go   = fire && cmd.op == CMD_SORT;
  assign sort_ncells = cmd.addr[IDX_W:0];
  assign sort_nsegs  = cmd.data[SEG_W:0];
  assign swap      = fire && cmd.op == CMD_SWAP;
  assign ipw_we    = fire && cmd.op == CMD_WR_IP;
  assign ipw_addr  = cmd.addr[$clog2(N_IP)-1:0];
  assign ipw_data  = cmd.data[$bits(ip_desc_t)-1:0];
  assign clear     = fire && cmd.op == CMD_START;
  assign ip_start  = clear;
  assign ip_num    = cmd.addr[$clog2(N_IP):0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tgt       <= '0;
      running   <= 1'b0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (fire && cmd.op == CMD_TARGET) tgt <= cmd.data[$bits(target_t)-1:0];
      if (clear) running <= 1'b1;
      if (running && ip_done) begin
        running   <= 1'b0;
        rsp_valid <= 1'b1;
        rsp       <= best;
      end
    end
  end
endmodule
