// tb_collector: feeds random left-move and right-move position streams (with
// random stalls on both sides) and checks the breakpoints against the
// formulas: range ends first, one breakpoint per pushed cell, target last.
module tb_collector;
  import flex_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, in_valid, in_ready, in_last, bp_valid, bp_ready, bp_last, busy;
  coord_t x_lo, x_hi, gx;
  shift_out_t in;
  bp_t bp;
  collector dut (.*);

  bp_t exp_q [$];
  int n_pushed_l = 0, n_pushed_r = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && bp_valid && bp_ready) begin
    bp_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected bp"); end
    else begin
      e = exp_q.pop_front();
      if (bp != e || bp_last != (e.slopel == 1 && e.sloper == 1)) begin
        failures++; $display("FAIL: bp x=%0d l=%0d r=%0d exp x=%0d l=%0d r=%0d", bp.x, bp.slopel, bp.sloper, e.x, e.slopel, e.sloper);
      end
    end
  end
  always @(negedge clk) bp_ready = ($urandom_range(0, 3) != 0);

  initial begin
    start = 0; in_valid = 0; in_last = 0; in = '0; x_lo = '0; x_hi = '0; gx = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      int n;
      n = int'($urandom_range(1, 30));
      x_lo = coord_t'($urandom_range(0, 50)); x_hi = x_lo + coord_t'($urandom_range(0, 20));
      gx = coord_t'($urandom_range(0, 80));
      exp_q.push_back('{x: x_lo, slopel: 0, sloper: 0});
      exp_q.push_back('{x: x_hi, slopel: 0, sloper: 0});
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int i = 0; i < 2 * n; i++) begin
        shift_out_t s;
        s.right = (i >= n); s.idx = cidx_t'(i); s.x = coord_t'($urandom_range(0, 100));
        s.pos = ($urandom_range(0, 1) == 1) ? s.x : (s.right ? s.x + coord_t'($urandom_range(1, 9)) : s.x - coord_t'($urandom_range(1, 9)));
        if (s.pos != s.x) begin
          if (s.right) begin exp_q.push_back('{x: s.x + x_hi - s.pos, slopel: 0, sloper: 1}); n_pushed_r++; end
          else begin exp_q.push_back('{x: s.x + x_lo - s.pos, slopel: 1, sloper: 0}); n_pushed_l++; end
        end
        in = s; in_last = (i == 2 * n - 1); in_valid = ($urandom_range(0, 4) != 0);
        while (!in_valid) begin @(negedge clk); in_valid = 1; end
        do @(posedge clk); while (!in_ready);
        @(negedge clk); in_valid = 0; in_last = 0;
      end
      exp_q.push_back('{x: gx, slopel: 1, sloper: 1});
      wait (!busy);
      checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d bps missing", exp_q.size()); exp_q.delete(); end
    end
    checks++; if (n_pushed_l == 0 || n_pushed_r == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
