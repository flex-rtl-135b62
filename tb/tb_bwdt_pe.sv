// tb_bwdt_pe: loads random breakpoint sets (range ends included) and their
// vR values straight into bp_ram, runs the backward traversal and compares
// the minimum displacement and its x with an evaluation of the summed curves
// at every integer x in [x_lo, x_hi] (largest x wins a tie). Also checks the
// latency of at most nb + 6 cycles.
module tb_bwdt_pe;
  import flex_pkg::*;
  localparam int BPN = 128, AW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, bank, busy, res_valid;
  logic [AW:0] nb, nq;
  coord_t x_lo, x_hi;
  logic [IP_W-1:0] id;
  fop_result_t res;
  logic raw_we, raw_wbank, raw_rbank, vr_we, vr_wbank, vr_rbank;
  logic [AW-1:0] raw_wa, raw_ra, vr_wa, vr_ra;
  coord_t raw_wx, raw_rx;
  slope_t raw_wsl, raw_rsl;
  cost_t vr_wd, vr_rd;

  bwdt_pe #(.BP_N(BPN)) dut (.*);
  bp_ram  #(.BP_N(BPN)) u_ram (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bx [BPN], bl [BPN], br [BPN], mx [BPN];

  function automatic longint f_at(int x, int n);
    longint v = 0;
    for (int i = 0; i < n; i++) begin
      if (bx[i] > x) v += longint'(bl[i]) * longint'(bx[i] - x);
      if (bx[i] < x) v += longint'(br[i]) * longint'(x - bx[i]);
    end
    return v;
  endfunction

  initial begin
    start = 0; bank = 0; nb = '0; nq = '0; x_lo = '0; x_hi = '0; id = '0;
    raw_we = 0; vr_we = 0; raw_wbank = 0; vr_wbank = 0; raw_wa = '0; vr_wa = '0; raw_wx = '0; raw_wsl = '0; vr_wd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int n, m, lat, lo, hi, ex;
      longint eb;
      n = int'($urandom_range(0, BPN - 2)); m = 0; lat = 0;
      lo = int'($urandom_range(0, 40)); hi = lo + int'($urandom_range(0, 25));
      for (int i = 0; i < n; i++) begin bx[i] = int'($urandom_range(0, 80)) - 10; bl[i] = int'($urandom_range(0, 3)); br[i] = int'($urandom_range(0, 3)); end
      bx[n] = lo; bl[n] = 0; br[n] = 0; bx[n+1] = hi; bl[n+1] = 0; br[n+1] = 0; n += 2;
      for (int i = 1; i < n; i++) for (int j = i; j > 0 && bx[j-1] > bx[j]; j--) begin
        int tx; tx = bx[j]; bx[j] = bx[j-1]; bx[j-1] = tx; tx = bl[j]; bl[j] = bl[j-1]; bl[j-1] = tx; tx = br[j]; br[j] = br[j-1]; br[j-1] = tx;
      end
      for (int i = 0; i < n; i++) if (i == 0 || bx[i] != bx[i-1]) begin mx[m] = bx[i]; m++; end
      for (int i = 0; i < n; i++) begin
        @(negedge clk); raw_we = 1; raw_wbank = it[0]; raw_wa = AW'(i); raw_wx = coord_t'(bx[i]); raw_wsl = slope_t'(bl[i]);
      end
      @(negedge clk); raw_we = 0;
      for (int q = 0; q < m; q++) begin
        longint e;
        e = 0;
        for (int i = 0; i < n; i++) if (bx[i] < mx[q]) e += longint'(br[i]) * longint'(mx[q] - bx[i]);
        @(negedge clk); vr_we = 1; vr_wbank = it[0]; vr_wa = AW'(q); vr_wd = e;
      end
      @(negedge clk); vr_we = 0;
      eb = 64'h7fff_ffff_ffff_ffff; ex = lo;
      for (int x = lo; x <= hi; x++) begin longint v; v = f_at(x, n); if (v <= eb) begin eb = v; ex = x; end end
      start = 1; bank = it[0]; nb = (AW+1)'(n); nq = (AW+1)'(m); x_lo = coord_t'(lo); x_hi = coord_t'(hi); id = IP_W'(it);
      @(negedge clk); start = 0;
      while (!res_valid) begin @(negedge clk); lat++; end
      checks++; if (res.cost != eb || int'(res.x) != ex || int'(res.id) != it) begin
        failures++; $display("FAIL: it %0d cost %0d x %0d, exp %0d at %0d", it, res.cost, res.x, eb, ex);
      end
      checks++; if (lat > n + 6) begin failures++; $display("FAIL: latency %0d for %0d bps", lat, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
