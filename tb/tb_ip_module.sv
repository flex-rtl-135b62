// tb_ip_module: the Insertion Point Module reads descriptors from a real
// ip_ram and hands them to two model PEs whose ready lines toggle at random
// and which return a result a random number of cycles later. Checks: every
// descriptor is handed out exactly once, in order, with its number as id
// and its content unchanged; `done` pulses once, after the last result.
module tb_ip_module;
  import flex_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, running, done, we;
  logic [5:0] num_ip;
  logic [4:0] raddr, waddr;
  ip_desc_t rdata, wdata, pe_ip;
  logic pe_valid [2], pe_ready [2], res_valid [2];

  ip_ram #(.N_IP(N)) u_ram (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  ip_module #(.N_PE(2), .N_IP(N)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ip_desc_t model [N];
  int next_id, n_done, pend [2], per_pe [2];
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 2; p++) begin
      res_valid[p] <= 0;
      if (pend[p] > 0) begin
        pend[p] <= pend[p] - 1;
        if (pend[p] == 1) res_valid[p] <= 1;
      end
      if (pe_valid[p] && pe_ready[p]) begin
        ip_desc_t e;
        e = model[next_id]; e.id = IP_W'(next_id);
        checks++;
        if (pe_ip != e) begin failures++; $display("FAIL: descriptor %0d wrong", next_id); end
        next_id <= next_id + 1;
        pend[p] <= int'($urandom_range(1, 9));
        per_pe[p]++;
      end
      pe_ready[p] <= (pend[p] == 0) && !(pe_valid[p] && pe_ready[p]) && ($urandom_range(0, 3) != 0);
    end
    if (done) n_done++;
  end

  initial begin
    start = 0; num_ip = '0; we = 0; waddr = '0; wdata = '0;
    pe_ready[0] = 0; pe_ready[1] = 0; res_valid[0] = 0; res_valid[1] = 0;
    pend[0] = 0; pend[1] = 0; per_pe[0] = 0; per_pe[1] = 0; next_id = 0; n_done = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); we = 1; waddr = 5'(i); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int g = 0; g < 6; g++) begin
      int n;
      n = int'($urandom_range(1, N));
      @(negedge clk); start = 1; num_ip = 6'(n); next_id = 0; n_done = 0;
      @(negedge clk); start = 0;
      wait (!running);
      repeat (3) @(negedge clk);
      checks++; if (next_id != n) begin failures++; $display("FAIL: %0d of %0d handed out", next_id, n); end
      checks++; if (n_done != 1) begin failures++; $display("FAIL: done pulsed %0d times", n_done); end
      checks++; if (pend[0] != 0 || pend[1] != 0) begin failures++; $display("FAIL: done before all results"); end
    end
    checks++; if (per_pe[0] == 0 || per_pe[1] == 0) begin failures++; $display("FAIL: a PE never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
