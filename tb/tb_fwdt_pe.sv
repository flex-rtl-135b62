// tb_fwdt_pe: streams random sorted breakpoint sets (many equal x values)
// into the forward traversal, then reads bp_ram back and checks the raw
// breakpoints, the merged count and every vR[q] against a direct sum of the
// right-side curves at x[q]. Also checks that a set of n breakpoints is
// taken at one per cycle and that done follows within two cycles.
module tb_fwdt_pe;
  import flex_pkg::*;
  localparam int BPN = 128, AW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, bank, in_valid, in_last, done;
  bp_t in_bp;
  logic raw_we, raw_wbank, raw_rbank, vr_we, vr_wbank, vr_rbank;
  logic [AW-1:0] raw_wa, raw_ra, vr_wa, vr_ra;
  coord_t raw_wx, raw_rx;
  slope_t raw_wsl, raw_rsl;
  cost_t vr_wd, vr_rd;
  logic [AW:0] nb, nq;

  fwdt_pe #(.BP_N(BPN)) dut (.*);
  bp_ram  #(.BP_N(BPN)) u_ram (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int bx [BPN], bl [BPN], br [BPN];
  int mx [BPN];

  initial begin
    start = 0; bank = 0; in_valid = 0; in_last = 0; in_bp = '0; raw_rbank = 0; vr_rbank = 0; raw_ra = '0; vr_ra = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      int n, m, t_last, t_done;
      n = int'($urandom_range(1, BPN)); m = 0;
      for (int i = 0; i < n; i++) begin bx[i] = int'($urandom_range(0, 60)) - 10; bl[i] = int'($urandom_range(0, 2)); br[i] = int'($urandom_range(0, 2)); end
      for (int i = 1; i < n; i++) for (int j = i; j > 0 && bx[j-1] > bx[j]; j--) begin
        int tx; tx = bx[j]; bx[j] = bx[j-1]; bx[j-1] = tx; tx = bl[j]; bl[j] = bl[j-1]; bl[j-1] = tx; tx = br[j]; br[j] = br[j-1]; br[j-1] = tx;
      end
      for (int i = 0; i < n; i++) if (i == 0 || bx[i] != bx[i-1]) begin mx[m] = bx[i]; m++; end
      @(negedge clk); start = 1; bank = it[0]; @(negedge clk); start = 0;
      for (int i = 0; i < n; i++) begin
        in_valid = 1; in_bp = '{x: coord_t'(bx[i]), slopel: slope_t'(bl[i]), sloper: slope_t'(br[i])}; in_last = (i == n - 1);
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      t_last = 0;
      while (!done) begin @(negedge clk); t_last++; end
      checks++; if (t_last > 2) begin failures++; $display("FAIL: done after %0d cycles", t_last); end
      checks++; if (int'(nb) != n || int'(nq) != m) begin failures++; $display("FAIL: nb=%0d nq=%0d exp %0d %0d", nb, nq, n, m); end
      raw_rbank = it[0]; vr_rbank = it[0];
      for (int i = 0; i < n; i++) begin
        raw_ra = AW'(i); @(negedge clk);
        checks++; if (int'(raw_rx) != bx[i] || int'(raw_rsl) != bl[i]) failures++;
      end
      for (int q = 0; q < m; q++) begin
        longint e;
        e = 0;
        for (int i = 0; i < n; i++) if (bx[i] < mx[q]) e += longint'(br[i]) * longint'(mx[q] - bx[i]);
        vr_ra = AW'(q); @(negedge clk);
        checks++; if (vr_rd != e) begin failures++; $display("FAIL: vR[%0d]=%0d exp %0d n=%0d m=%0d", q, vr_rd, e, n, m); for (int i = 0; i < n && i < 6; i++) $display("  bp %0d x=%0d l=%0d r=%0d", i, bx[i], bl[i], br[i]); end
      end
      t_done = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
