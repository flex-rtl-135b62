// tb_ip_ram: writes random descriptors to random slots of the Insertion
// Point RAM while reading others, and checks that every read returns, one
// cycle after its address, the value last written to that slot.
module tb_ip_ram;
  import flex_pkg::*;
  localparam int N = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [5:0] waddr, raddr;
  ip_desc_t wdata, rdata;
  ip_ram #(.N_IP(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ip_desc_t model [N];
  ip_desc_t exp_q;
  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      raddr = 6'($urandom_range(0, N - 1));
      exp_q = model[raddr];
      we = $urandom_range(0, 1); waddr = 6'($urandom_range(0, N - 1));
      wdata = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata != exp_q) begin failures++; $display("FAIL: read %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
