// tb_flex_top_full: the end-to-end test of tb_flex_top run on the
// accelerator at its default sizes (2048-cell localRegions, 256 segments,
// 512 insertion point slots, two FOP PEs). Two full 2048-cell regions are
// used: the first is loaded, sorted and swapped in; while its first target
// is evaluated the second is loaded and sorted behind it. Each response is
// compared with the brute-force reference and the same mechanisms as in
// tb_flex_top are counted; each must occur at least once.
module tb_flex_top_full;
  import flex_pkg::*;
  import flex_ref_pkg::*;

  localparam int NIP = 16;  // insertion points per target used by the test
  localparam int CELLS = 2048, ROWS = 256, NREG = 2, NTG = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, rsp_valid;
  host_cmd_t cmd;
  fop_result_t rsp;

  flex_top dut (.*);

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- command queue ----------------
  host_cmd_t q [$];
  function automatic host_cmd_t mk(cmd_op_e op, int unsigned addr, logic [127:0] data);
    host_cmd_t c;
    c.op = op; c.addr = addr; c.data = data;
    return c;
  endfunction

  task automatic send_all();
    while (q.size() > 0) begin
      @(negedge clk); cmd_valid = 1; cmd = q.pop_front();
      do @(posedge clk); while (!cmd_ready);
    end
    @(negedge clk); cmd_valid = 0; cmd = '0;
  endtask

  // commands that load the current reference region into the idle bank
  function automatic void push_region();
    for (int i = 0; i < nc; i++) q.push_back(mk(CMD_WR_LCT, i, 128'(lct_of(i))));
    for (int r = 0; r < nr; r++) begin
      q.push_back(mk(CMD_WR_SEGLEN, r, 128'(rlen[r])));
      for (int s = 0; s < rlen[r]; s++) q.push_back(mk(CMD_WR_LSC, (r << SLOT_W) | s, 128'(rlist[r][s])));
    end
    q.push_back(mk(CMD_SORT, nc, 128'(nr)));
  endfunction

  // ---------------- targets of one region ----------------
  target_t  t_tg  [NTG];
  int       t_nip [NTG];
  ip_desc_t t_ip  [NTG][NIP];
  longint   t_cost[NTG];
  int       t_x   [NTG], t_id [NTG];

  function automatic void make_targets();
    longint c; int x;
    for (int t = 0; t < NTG; t++) begin
      int th;
      th = int'($urandom_range(1, TH_MAX));
      t_tg[t].w = 20'($urandom_range(1, 6)); t_tg[t].h = 4'(th); t_tg[t].gx = coord_t'($urandom_range(0, 60));
      t_nip[t] = int'($urandom_range(3, NIP));
      t_cost[t] = 64'h7fff_ffff_ffff_ffff;
      for (int k = 0; k < t_nip[t]; k++) begin
        t_ip[t][k] = gen_ip(k, th, 8);
        ref_fop(t_ip[t][k], t_tg[t], c, x);
        if (c < t_cost[t]) begin t_cost[t] = c; t_x[t] = x; t_id[t] = k; end
      end
    end
  endfunction

  function automatic void push_target(int t);
    q.push_back(mk(CMD_TARGET, 0, 128'(t_tg[t])));
    for (int k = 0; k < t_nip[t]; k++) q.push_back(mk(CMD_WR_IP, k, 128'(t_ip[t][k])));
    q.push_back(mk(CMD_START, t_nip[t], '0));
  endfunction

  int n_rsp;
  always @(posedge clk) if (rst_n && rsp_valid) n_rsp++;

  task automatic check_rsp(int t);
    wait (n_rsp > 0);
    @(negedge clk);
    n_rsp--;
    checks++;
    if (rsp.cost != t_cost[t] || int'(rsp.x) != t_x[t] || int'(rsp.id) != t_id[t]) begin
      failures++;
      $display("FAIL: target %0d: cost %0d x %0d ip %0d, expected %0d at %0d ip %0d",
               t, rsp.cost, rsp.x, rsp.id, t_cost[t], t_x[t], t_id[t]);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int c_ahead_ov, c_swap, c_stall, c_ip_pe0, c_ip_pe1, c_fine, c_coarse, c_sync_replace;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_cluster.sort_busy && dut.pe_busy) c_ahead_ov++;
    if (dut.swap) c_swap++;
    if (cmd_valid && !cmd_ready) c_stall++;
    if (dut.pe_valid[0] && dut.pe_ready[0]) c_ip_pe0++;
    if (dut.pe_valid[1] && dut.pe_ready[1]) c_ip_pe1++;
    if (dut.u_cluster.g_pe[0].u_pe.sacs_busy && dut.u_cluster.g_pe[0].u_pe.sort_busy &&
        !dut.u_cluster.g_pe[0].u_pe.sort_in_ready) c_fine++;
    if (dut.u_cluster.g_pe[0].u_pe.bwd_busy && dut.u_cluster.g_pe[0].u_pe.sacs_busy) c_coarse++;
    for (int p = 0; p < 2; p++)
      if (dut.res_valid[p] && dut.best_valid && !dut.clear &&
          (dut.u_cluster.pe_res[p].cost < dut.best.cost)) c_sync_replace++;
  end

  task automatic need(string what, int n);
    checks++;
    $display("%s: %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; n_rsp = 0;
    c_ahead_ov = 0; c_swap = 0; c_stall = 0; c_ip_pe0 = 0; c_ip_pe1 = 0;
    c_fine = 0; c_coarse = 0; c_sync_replace = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    gen_region(CELLS, ROWS, 3, 2);
    push_region();
    q.push_back(mk(CMD_SWAP, 0, '0));
    send_all();
    for (int r = 0; r < NREG; r++) begin
      make_targets();
      if (r + 1 < NREG) gen_region(CELLS, ROWS, 3, 2);
      // first target, with the next region loaded behind it
      push_target(0);
      if (r + 1 < NREG) push_region();
      send_all();
      check_rsp(0);
      for (int t = 1; t < NTG; t++) begin
        push_target(t);
        send_all();
        check_rsp(t);
      end
      if (r + 1 < NREG) begin
        q.push_back(mk(CMD_SWAP, 0, '0));
        send_all();
      end
    end
    need("ahead sort overlapping PE work (cycles)", c_ahead_ov);
    need("region swaps", c_swap);
    need("command stalls (cycles)", c_stall);
    need("insertion points on PE0", c_ip_pe0);
    need("insertion points on PE1", c_ip_pe1);
    need("fine-grain overlap (cycles)", c_fine);
    need("coarse-grain overlap (cycles)", c_coarse);
    need("sync module replaced its best", c_sync_replace);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
