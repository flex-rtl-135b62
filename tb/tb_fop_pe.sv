// tb_fop_pe: end-to-end check of one FOP PE.
//
// Random regions are loaded (Cell_sort from the reference order), then
// batches of random insertion points for random targets are streamed in
// back to back. Each result (minimum displacement and best x) is compared
// with the reference, which shifts cells by repeated pairwise pushes and
// evaluates the displacement at every integer x. The testbench also counts
// cycles in which the pipeline overlaps work: SACS running while the sorter
// holds the previous insertion point (fine grain) and the backward
// traversal of one insertion point running while a later one is in SACS or
// the forward traversal (coarse grain); both must occur.
module tb_fop_pe;
  import flex_pkg::*;
  import flex_ref_pkg::*;

  localparam int NC = 96, NS = 16, SC = 64;
  localparam int CELLS = 70, ROWS = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic swap, lct_we, lsc_we, len_we, cs_we, cnt_we;
  cidx_t lct_wa, lsc_wd, cs_wa, cs_wd;
  lct_entry_t lct_wd;
  seg_t lsc_wseg, len_wseg;
  slot_t lsc_wslot;
  logic [INS_W-1:0] len_wd;
  logic [IDX_W:0] cnt_ncells;
  logic [SEG_W:0] cnt_nsegs;
  target_t tgt;
  logic ip_valid, ip_ready, res_valid, busy;
  ip_desc_t ip;
  fop_result_t res;

  fop_pe #(.N_CELLS(NC), .N_SEGS(NS), .SEG_CELLS(SC)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_region();
    for (int i = 0; i < nc; i++) begin
      @(negedge clk); lct_we = 1; lct_wa = cidx_t'(i); lct_wd = lct_of(i);
      cs_we = 1; cs_wa = cidx_t'(i); cs_wd = cidx_t'(sorted_idx[i]);
    end
    @(negedge clk); lct_we = 0; cs_we = 0;
    for (int r = 0; r < nr; r++) begin
      @(negedge clk); len_we = 1; len_wseg = seg_t'(r); len_wd = INS_W'(rlen[r]);
      for (int s = 0; s < rlen[r]; s++) begin
        @(negedge clk); len_we = 0; lsc_we = 1; lsc_wseg = seg_t'(r); lsc_wslot = slot_t'(s); lsc_wd = cidx_t'(rlist[r][s]);
      end
      @(negedge clk); lsc_we = 0; len_we = 0;
    end
    @(negedge clk); cnt_we = 1; cnt_ncells = (IDX_W+1)'(nc); cnt_nsegs = (SEG_W+1)'(nr);
    @(negedge clk); cnt_we = 0;
    wait (!busy);
    @(negedge clk); swap = 1;
    @(negedge clk); swap = 0;
  endtask

  longint e_cost [64];
  int     e_x [64];
  int     n_res, fine_ov, coarse_ov;
  always @(posedge clk) if (rst_n) begin
    if (res_valid) begin
      checks++;
      if (res.cost != e_cost[n_res] || int'(res.x) != e_x[n_res] || int'(res.id) != n_res) begin
        failures++;
        $display("FAIL: ip %0d: cost %0d x %0d id %0d, expected %0d at %0d", n_res, res.cost, res.x, res.id, e_cost[n_res], e_x[n_res]);
      end
      n_res++;
    end
    if (dut.sacs_busy && dut.sort_busy && !dut.sort_in_ready) fine_ov++;
    if (dut.bwd_busy && (dut.sacs_busy || dut.fwd_act)) coarse_ov++;
  end

  initial begin
    swap = 0; lct_we = 0; lsc_we = 0; len_we = 0; cs_we = 0; cnt_we = 0; ip_valid = 0;
    lct_wa = '0; lct_wd = '0; lsc_wseg = '0; lsc_wslot = '0; lsc_wd = '0; len_wseg = '0; len_wd = '0;
    cs_wa = '0; cs_wd = '0; cnt_ncells = '0; cnt_nsegs = '0; ip = '0; tgt = '0;
    fine_ov = 0; coarse_ov = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int reg_i = 0; reg_i < 2; reg_i++) begin
      gen_region(CELLS, ROWS, 3, 2);
      load_region();
      for (int tg_i = 0; tg_i < 3; tg_i++) begin
        int th, nip;
        ip_desc_t ips [64];
        th = int'($urandom_range(1, TH_MAX));
        nip = int'($urandom_range(4, 12));
        tgt.w = 20'($urandom_range(1, 6)); tgt.h = 4'(th); tgt.gx = coord_t'($urandom_range(0, 60));
        for (int k = 0; k < nip; k++) begin
          ips[k] = gen_ip(k, th, 8);
          ref_fop(ips[k], tgt, e_cost[k], e_x[k]);
        end
        n_res = 0;
        for (int k = 0; k < nip; k++) begin
          @(negedge clk); ip_valid = 1; ip = ips[k];
          do @(posedge clk); while (!ip_ready);
          @(negedge clk); ip_valid = 0;
        end
        wait (n_res == nip);
        wait (!busy);
      end
    end
    checks++; if (fine_ov == 0)   begin failures++; $display("FAIL: SACS never overlapped the sorter"); end
    checks++; if (coarse_ov == 0) begin failures++; $display("FAIL: backward traversal never overlapped later work"); end
    $display("overlap cycles: fine %0d, coarse %0d", fine_ov, coarse_ov);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
