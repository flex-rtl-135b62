// tb_fop_cluster: the cluster is loaded with random regions through its
// write ports only (no Cell_sort: the Ahead Sorter must build it), then the
// insertion points of random targets are offered to whichever PE is ready.
// The Synchronization Module's best result is compared with a brute-force
// reference; ties go to the lower insertion point. The Cell_sort written
// into PE 0 is also compared with the reference order, and both PEs must
// have been used.
module tb_fop_cluster;
  import flex_pkg::*;
  import flex_ref_pkg::*;
  localparam int NC = 96, NS = 16, SC = 64;
  localparam int CELLS = 70, ROWS = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic swap, lct_we, lsc_we, len_we, sort_go, sort_ready, sort_busy, clear, best_valid, busy;
  cidx_t lct_wa, lsc_wd;
  lct_entry_t lct_wd;
  seg_t lsc_wseg, len_wseg;
  slot_t lsc_wslot;
  logic [INS_W-1:0] len_wd;
  logic [IDX_W:0] sort_ncells;
  logic [SEG_W:0] sort_nsegs;
  target_t tgt;
  logic ip_valid [2], ip_ready [2], res_valid [2];
  ip_desc_t ip;
  fop_result_t best;

  fop_cluster #(.N_PE(2), .N_CELLS(NC), .N_SEGS(NS), .SEG_CELLS(SC)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cs_seen [NC];
  int cs_n;
  always @(posedge clk) if (rst_n && dut.s_out_valid) begin
    cs_seen[dut.cs_cnt] = int'(dut.s_out_data);
    cs_n++;
  end

  int used [2], n_res;
  always @(posedge clk) if (rst_n) for (int p = 0; p < 2; p++) begin
    if (ip_valid[p] && ip_ready[p]) used[p]++;
    if (res_valid[p]) n_res++;
  end

  task automatic load_region();
    for (int i = 0; i < nc; i++) begin
      @(negedge clk); lct_we = 1; lct_wa = cidx_t'(i); lct_wd = lct_of(i);
      while (!sort_ready) begin lct_we = 0; @(negedge clk); lct_we = 1; end
    end
    @(negedge clk); lct_we = 0;
    for (int r = 0; r < nr; r++) begin
      @(negedge clk); len_we = 1; len_wseg = seg_t'(r); len_wd = INS_W'(rlen[r]);
      for (int s = 0; s < rlen[r]; s++) begin
        @(negedge clk); len_we = 0; lsc_we = 1; lsc_wseg = seg_t'(r); lsc_wslot = slot_t'(s); lsc_wd = cidx_t'(rlist[r][s]);
      end
      @(negedge clk); lsc_we = 0; len_we = 0;
    end
    while (!sort_ready) @(negedge clk);
    cs_n = 0;
    sort_go = 1; sort_ncells = (IDX_W+1)'(nc); sort_nsegs = (SEG_W+1)'(nr);
    @(negedge clk); sort_go = 0;
    wait (!sort_busy && !busy);
    checks++;
    if (cs_n != nc) begin failures++; $display("FAIL: %0d sorted cells", cs_n); end
    for (int i = 0; i < nc; i++) begin
      checks++;
      if (cs_seen[i] != sorted_idx[i]) begin failures++; $display("FAIL: Cell_sort[%0d]=%0d expected %0d", i, cs_seen[i], sorted_idx[i]); end
    end
    @(negedge clk); swap = 1;
    @(negedge clk); swap = 0;
  endtask

  initial begin
    swap = 0; lct_we = 0; lsc_we = 0; len_we = 0; sort_go = 0; clear = 0;
    lct_wa = '0; lct_wd = '0; lsc_wseg = '0; lsc_wslot = '0; lsc_wd = '0; len_wseg = '0; len_wd = '0;
    sort_ncells = '0; sort_nsegs = '0; tgt = '0; ip = '0; ip_valid[0] = 0; ip_valid[1] = 0;
    used[0] = 0; used[1] = 0; n_res = 0; cs_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int reg_i = 0; reg_i < 2; reg_i++) begin
      gen_region(CELLS, ROWS, 3, 2);
      load_region();
      for (int tg_i = 0; tg_i < 3; tg_i++) begin
        int th, nip, ex, eid, x, k;
        longint ec, c;
        ip_desc_t d;
        th = int'($urandom_range(1, TH_MAX));
        nip = int'($urandom_range(3, 12));
        tgt.w = 20'($urandom_range(1, 6)); tgt.h = 4'(th); tgt.gx = coord_t'($urandom_range(0, 60));
        @(negedge clk); clear = 1;
        @(negedge clk); clear = 0;
        ec = 64'h7fff_ffff_ffff_ffff; ex = 0; eid = 0; n_res = 0;
        for (k = 0; k < nip; k++) begin
          d = gen_ip(k, th, 8);
          ref_fop(d, tgt, c, x);
          if (c < ec) begin ec = c; ex = x; eid = k; end
          ip = d;
          while (!ip_ready[0] && !ip_ready[1]) @(negedge clk);
          if (ip_ready[0]) ip_valid[0] = 1; else ip_valid[1] = 1;
          @(negedge clk); ip_valid[0] = 0; ip_valid[1] = 0;
        end
        wait (n_res == nip);
        repeat (2) @(negedge clk);
        checks++;
        if (!best_valid || best.cost != ec || int'(best.x) != ex || int'(best.id) != eid) begin
          failures++; $display("FAIL: best %0d at %0d ip %0d, expected %0d at %0d ip %0d", best.cost, best.x, best.id, ec, ex, eid);
        end
      end
    end
    checks++; if (used[0] == 0 || used[1] == 0) begin failures++; $display("FAIL: PE use %0d/%0d", used[0], used[1]); end
    $display("PE use: %0d / %0d", used[0], used[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
