// tb_sacs_pe: checks the SACS PE against the multi-pass reference.
//
// A random region (multi-row cells up to 3 rows) is written into a
// region_mem, Cell_sort is loaded from the reference order, and random
// insertion points are run back to back, so both LCPT banks and both CST
// tables are used and re-initialised. Every streamed position (left-move
// posl and right-move posr of every localCell) is compared with the
// reference; the stream length, out_last and done are checked too. A
// second region is loaded through the ping/pong swap halfway.
module tb_sacs_pe;
  import flex_pkg::*;
  import flex_ref_pkg::*;

  localparam int NC = 96, NS = 16, SC = 64;
  localparam int CELLS = 60, ROWS = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // region memory write side
  logic swap, lct_we, lsc_we, len_we, cs_we, cnt_we;
  cidx_t lct_wa, lsc_wd, cs_wa, cs_wd;
  lct_entry_t lct_wd;
  seg_t lsc_wseg, len_wseg;
  slot_t lsc_wslot;
  logic [INS_W-1:0] len_wd;
  logic [IDX_W:0] cnt_ncells;
  logic [SEG_W:0] cnt_nsegs;
  // read side
  cidx_t lct_ra, lct2_ra, lsc_rd, cs_ra, cs_rd;
  lct_entry_t lct_rd, lct2_rd;
  seg_t lsc_rseg, len_rseg, len2_rseg;
  slot_t lsc_rslot;
  logic [INS_W-1:0] len_rd, len2_rd;
  logic [IDX_W:0] ncells;
  logic [SEG_W:0] nsegs;
  logic active;

  region_mem #(.N_CELLS(NC), .N_SEGS(NS), .SEG_CELLS(SC)) u_mem (.*);

  logic region_new, ip_valid, ip_ready, out_valid, out_ready, out_last, done, busy;
  ip_desc_t ip;
  target_t tgt;
  shift_out_t out;

  sacs_pe #(.N_CELLS(NC), .N_SEGS(NS), .SEG_CELLS(SC)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_region();
    swap = 0; lct_we = 0; lsc_we = 0; len_we = 0; cs_we = 0; cnt_we = 0;
    for (int i = 0; i < nc; i++) begin
      @(negedge clk); lct_we = 1; lct_wa = cidx_t'(i); lct_wd = lct_of(i);
      cs_we = 1; cs_wa = cidx_t'(i); cs_wd = cidx_t'(sorted_idx[i]);
    end
    @(negedge clk); lct_we = 0; cs_we = 0;
    for (int r = 0; r < nr; r++) begin
      @(negedge clk); len_we = 1; len_wseg = seg_t'(r); len_wd = INS_W'(rlen[r]);
      for (int s = 0; s < rlen[r]; s++) begin
        @(negedge clk); len_we = 0; lsc_we = 1; lsc_wseg = seg_t'(r); lsc_wslot = slot_t'(s);
        lsc_wd = cidx_t'(rlist[r][s]);
      end
      @(negedge clk); lsc_we = 0; len_we = 0;
    end
    @(negedge clk); cnt_we = 1; cnt_ncells = (IDX_W+1)'(nc); cnt_nsegs = (SEG_W+1)'(nr);
    @(negedge clk); cnt_we = 0;
    wait (!busy);
    @(negedge clk); swap = 1; region_new = 1;
    @(negedge clk); swap = 0; region_new = 0;
  endtask

  int got_l [MAXC], got_r [MAXC];
  int n_out, n_last, n_done;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      n_out++;
      if (out.right) got_r[int'(out.idx)] = int'(out.pos); else got_l[int'(out.idx)] = int'(out.pos);
      if (out_last) n_last++;
    end
    if (done) n_done++;
  end

  task automatic run_ip(int id);
    int pl [MAXC], pr [MAXC];
    int th;
    th = int'($urandom_range(1, 3));
    tgt.w = 20'($urandom_range(1, 5)); tgt.h = 4'(th); tgt.gx = '0;
    ip = gen_ip(id, th, 6);
    ref_shift(ip, tgt, pl, pr);
    n_out = 0; n_last = 0; n_done = 0;
    for (int i = 0; i < nc; i++) begin got_l[i] = -99999; got_r[i] = -99999; end
    @(negedge clk); ip_valid = 1;
    do @(posedge clk); while (!ip_ready);
    @(negedge clk); ip_valid = 0;
    wait (n_done == 1);
    @(negedge clk);
    check(n_out == 2 * nc, $sformatf("ip %0d: %0d outputs, expected %0d", id, n_out, 2 * nc));
    check(n_last == 1, "out_last count");
    for (int i = 0; i < nc; i++) begin
      if (pl[i] != cx[i]) moved_l++;
      if (pr[i] != cx[i]) moved_r++;
      check(got_l[i] == pl[i], $sformatf("ip %0d cell %0d posl %0d exp %0d", id, i, got_l[i], pl[i]));
      check(got_r[i] == pr[i], $sformatf("ip %0d cell %0d posr %0d exp %0d", id, i, got_r[i], pr[i]));
    end
  endtask

  int moved_l = 0, moved_r = 0;
  initial begin
    region_new = 0; ip_valid = 0; swap = 0;
    lct_we = 0; lsc_we = 0; len_we = 0; cs_we = 0; cnt_we = 0;
    lct_wa = '0; lct_wd = '0; lsc_wseg = '0; lsc_wslot = '0; lsc_wd = '0; len_wseg = '0; len_wd = '0;
    cs_wa = '0; cs_wd = '0; cnt_ncells = '0; cnt_nsegs = '0; ip = '0; tgt = '0;
    out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int reg_i = 0; reg_i < 2; reg_i++) begin
      gen_region(CELLS, ROWS, 3, 2);
      load_region();
      for (int k = 0; k < 12; k++) run_ip(k);
    end
    // one run with back-pressure on the output stream
    fork
      run_ip(20);
      begin repeat (200) begin @(negedge clk); out_ready = ($urandom_range(0, 2) != 0); end out_ready = 1; end
    join
    check(moved_l > 20 && moved_r > 20, $sformatf("too few pushes: %0d left, %0d right", moved_l, moved_r));
    $display("pushed cells: %0d left-move, %0d right-move", moved_l, moved_r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
