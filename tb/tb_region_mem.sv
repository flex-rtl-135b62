// tb_region_mem: fills the idle bank of the region store with random LCT,
// LSC (odd and even rows), segment-length and Cell_sort contents, swaps,
// and reads everything back through all read ports; then fills the other
// bank with different data and checks that reads follow the swap and that
// writes never disturb the active bank.
module tb_region_mem;
  import flex_pkg::*;
  localparam int NC = 32, NS = 8, SC = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic swap, active, lct_we, lsc_we, len_we, cs_we, cnt_we;
  cidx_t lct_wa, lsc_wd, cs_wa, cs_wd, lct_ra, lct2_ra, lsc_rd, cs_ra, cs_rd;
  lct_entry_t lct_wd, lct_rd, lct2_rd;
  seg_t lsc_wseg, len_wseg, lsc_rseg, len_rseg, len2_rseg;
  slot_t lsc_wslot, lsc_rslot;
  logic [INS_W-1:0] len_wd, len_rd, len2_rd;
  logic [IDX_W:0] cnt_ncells, ncells;
  logic [SEG_W:0] cnt_nsegs, nsegs;
  region_mem #(.N_CELLS(NC), .N_SEGS(NS), .SEG_CELLS(SC)) dut (.*);

  lct_entry_t e_lct [2][NC];
  cidx_t e_lsc [2][NS][SC], e_cs [2][NC];
  logic [INS_W-1:0] e_len [2][NS];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int b);
    for (int i = 0; i < NC; i++) begin
      @(negedge clk); lct_we = 1; cs_we = 1; lct_wa = cidx_t'(i); cs_wa = cidx_t'(i);
      lct_wd = {$urandom, $urandom, $urandom, 4'($urandom)}; cs_wd = cidx_t'($urandom);
      e_lct[b][i] = lct_wd; e_cs[b][i] = cs_wd;
    end
    @(negedge clk); lct_we = 0; cs_we = 0;
    for (int s = 0; s < NS; s++) begin
      @(negedge clk); len_we = 1; len_wseg = seg_t'(s); len_wd = INS_W'($urandom); e_len[b][s] = len_wd;
      for (int k = 0; k < SC; k++) begin
        @(negedge clk); len_we = 0; lsc_we = 1; lsc_wseg = seg_t'(s); lsc_wslot = slot_t'(k);
        lsc_wd = cidx_t'($urandom); e_lsc[b][s][k] = lsc_wd;
      end
      @(negedge clk); lsc_we = 0;
    end
    @(negedge clk); cnt_we = 1; cnt_ncells = (IDX_W+1)'(b + 5); cnt_nsegs = (SEG_W+1)'(b + 3);
    @(negedge clk); cnt_we = 0;
  endtask

  task automatic readback(int b);
    for (int i = 0; i < NC; i++) begin
      @(negedge clk); lct_ra = cidx_t'(i); lct2_ra = cidx_t'(NC - 1 - i); cs_ra = cidx_t'(i);
      @(negedge clk);
      checks++; if (lct_rd != e_lct[b][i] || lct2_rd != e_lct[b][NC-1-i] || cs_rd != e_cs[b][i]) failures++;
    end
    for (int s = 0; s < NS; s++) begin
      @(negedge clk); len_rseg = seg_t'(s); len2_rseg = seg_t'(NS - 1 - s);
      @(negedge clk);
      checks++; if (len_rd != e_len[b][s] || len2_rd != e_len[b][NS-1-s]) failures++;
      for (int k = 0; k < SC; k++) begin
        @(negedge clk); lsc_rseg = seg_t'(s); lsc_rslot = slot_t'(k);
        @(negedge clk);
        checks++; if (lsc_rd != e_lsc[b][s][k]) failures++;
      end
    end
    checks++; if (int'(ncells) != b + 5 || int'(nsegs) != b + 3) failures++;
  endtask

  initial begin
    swap = 0; lct_we = 0; lsc_we = 0; len_we = 0; cs_we = 0; cnt_we = 0;
    lct_wa = '0; lct_wd = '0; lsc_wseg = '0; lsc_wslot = '0; lsc_wd = '0; len_wseg = '0; len_wd = '0;
    cs_wa = '0; cs_wd = '0; cnt_ncells = '0; cnt_nsegs = '0;
    lct_ra = '0; lct2_ra = '0; lsc_rseg = '0; lsc_rslot = '0; len_rseg = '0; len2_rseg = '0; cs_ra = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    fill(0);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    checks++; if (active != 1'b1) failures++;
    readback(0);
    fill(1);                      // goes to the idle bank
    readback(0);                  // active bank untouched
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    readback(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
