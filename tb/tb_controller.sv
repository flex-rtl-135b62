// tb_controller: sends random host commands to the controller and checks,
// for each accepted one, the strobe and fields it must produce (region
// writes, sort start, swap, IP RAM write, target latch, clear/start);
// checks the back-pressure rules (sorter not ready, PEs busy, target
// running) and that a finished evaluation returns the best result once.
module tb_controller;
  import flex_pkg::*;
  localparam int NIP = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, rsp_valid;
  host_cmd_t cmd;
  fop_result_t rsp, best;
  logic swap, lct_we, lsc_we, len_we, sort_go, sort_ready, sort_busy, pe_busy;
  cidx_t lct_wa, lsc_wd;
  lct_entry_t lct_wd;
  seg_t lsc_wseg, len_wseg;
  slot_t lsc_wslot;
  logic [INS_W-1:0] len_wd;
  logic [IDX_W:0] sort_ncells;
  logic [SEG_W:0] sort_nsegs;
  target_t tgt;
  logic ipw_we, clear, ip_start, ip_done;
  logic [4:0] ipw_addr;
  ip_desc_t ipw_data;
  logic [5:0] ip_num;

  controller #(.N_IP(NIP)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (op %0d)", what, cmd.op); end
  endfunction

  bit running;
  int n_stall;
  initial begin
    cmd_valid = 0; cmd = '0; sort_ready = 1; sort_busy = 0; pe_busy = 0; ip_done = 0; best = '0;
    running = 0; n_stall = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      bit exp_ready, was_clear, was_tgt;
      @(negedge clk);
      ip_done = 0;
      cmd_valid = 1;
      cmd.op   = cmd_op_e'($urandom_range(0, 8));
      cmd.addr = $urandom;
      cmd.data = {$urandom, $urandom, $urandom, $urandom};
      sort_ready = ($urandom_range(0, 3) != 0);
      sort_busy  = ($urandom_range(0, 2) == 0);
      pe_busy    = ($urandom_range(0, 2) == 0);
      if (running && $urandom_range(0, 4) == 0) begin
        ip_done = 1; best = {$urandom, $urandom, $urandom};
      end
      case (cmd.op)
        CMD_WR_LCT, CMD_SORT: exp_ready = sort_ready;
        CMD_SWAP: exp_ready = !sort_busy && !pe_busy && !running;
        CMD_WR_IP, CMD_TARGET, CMD_START: exp_ready = !running;
        default: exp_ready = 1;
      endcase
      #1;
      chk(cmd_ready == exp_ready, "cmd_ready");
      if (!cmd_ready) n_stall++;
      chk(lct_we == (cmd_ready && cmd.op == CMD_WR_LCT), "lct_we");
      chk(lsc_we == (cmd_ready && cmd.op == CMD_WR_LSC), "lsc_we");
      chk(len_we == (cmd_ready && cmd.op == CMD_WR_SEGLEN), "len_we");
      chk(sort_go == (cmd_ready && cmd.op == CMD_SORT), "sort_go");
      chk(swap == (cmd_ready && cmd.op == CMD_SWAP), "swap");
      chk(ipw_we == (cmd_ready && cmd.op == CMD_WR_IP), "ipw_we");
      chk(clear == (cmd_ready && cmd.op == CMD_START) && ip_start == clear, "clear/start");
      if (lct_we) chk(lct_wa == cmd.addr[10:0] && lct_wd == cmd.data[99:0], "lct fields");
      if (lsc_we) chk(lsc_wseg == cmd.addr[15:8] && lsc_wslot == cmd.addr[7:0] && lsc_wd == cmd.data[10:0], "lsc fields");
      if (len_we) chk(len_wseg == cmd.addr[7:0] && len_wd == cmd.data[8:0], "len fields");
      if (sort_go) chk(sort_ncells == cmd.addr[11:0] && sort_nsegs == cmd.data[8:0], "sort fields");
      if (ipw_we) chk(ipw_addr == cmd.addr[4:0] && ipw_data == cmd.data[116:0], "ip fields");
      if (clear) chk(ip_num == cmd.addr[5:0], "ip_num");
      was_clear = clear; was_tgt = cmd_ready && cmd.op == CMD_TARGET;
      @(posedge clk); #1;
      if (was_tgt) chk(tgt == cmd.data[$bits(target_t)-1:0], "target latch");
      chk(rsp_valid == (running && ip_done), "rsp_valid");
      if (rsp_valid) chk(rsp == best, "rsp value");
      if (running && ip_done) running = 0;
      if (was_clear) running = 1;
    end
    cmd_valid = 0;
    chk(n_stall > 0, "stalls occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
