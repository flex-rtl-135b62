// tb_sort_engine: sorts random sets of signed keys (sizes 1..N, many equal
// keys, negative keys) with random input stalls and checks that the output
// is ascending, stable (payload = arrival number), a permutation of the
// input, ends with out_last, and that sorting n elements takes no more
// than 2n + n*ceil(log2(n/RUN)) + n + 8 cycles after the last input.
module tb_sort_engine;
  localparam int N = 200, RUN = 8, KW = 12, DW = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_last, out_valid, out_last, busy;
  logic [KW-1:0] in_key, out_key;
  logic [DW-1:0] in_data, out_data;
  sort_engine #(.N(N), .RUN(RUN), .KEY_W(KW), .DATA_W(DW)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int keys [N];
  int got_k [N], got_d [N];
  int n_got;
  always @(posedge clk) if (rst_n && out_valid) begin
    got_k[n_got] = int'($signed(out_key)); got_d[n_got] = int'(out_data);
    n_got++;
    if (out_last) begin checks++; if (n_got == 0) failures++; end
  end

  initial begin
    in_valid = 0; in_last = 0; in_key = '0; in_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 25; it++) begin
      int n, cyc, passes, w, bad;
      n = (it == 0) ? 1 : (it == 1) ? N : int'($urandom_range(1, N));
      n_got = 0;
      for (int i = 0; i < n; i++) begin
        keys[i] = (it % 3 == 0) ? int'($urandom_range(0, 7)) : int'($urandom_range(0, 4000)) - 2000;
        in_valid = ($urandom_range(0, 3) != 0);
        while (!in_valid) begin @(negedge clk); in_valid = ($urandom_range(0, 3) != 0); end
        in_key = KW'(keys[i]); in_data = DW'(i); in_last = (i == n - 1);
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      cyc = 0;
      while (busy || out_valid) begin @(negedge clk); cyc++; end
      passes = 0; w = RUN; while (w < n) begin w *= 2; passes++; end
      checks++; if (n_got != n) begin failures++; $display("FAIL: %0d of %0d out", n_got, n); end
      checks++; if (cyc > 2 * n + n * passes + n + 8) begin failures++; $display("FAIL: %0d cycles for %0d", cyc, n); end
      bad = 0;
      for (int i = 1; i < n_got; i++) begin
        if (got_k[i-1] > got_k[i]) bad++;
        if (got_k[i-1] == got_k[i] && got_d[i-1] > got_d[i]) bad++;
      end
      for (int i = 0; i < n_got; i++) if (got_d[i] >= n || got_k[i] != int'($signed(KW'(keys[got_d[i]])))) bad++;
      checks++; if (bad != 0) begin failures++; $display("FAIL: set %0d (n=%0d) has %0d order errors", it, n, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
