// tb_bp_ram: writes random breakpoints and vR values into both banks of the
// breakpoint buffer and reads them back with the one-cycle read latency,
// checking that the banks are independent.
module tb_bp_ram;
  import flex_pkg::*;
  localparam int BPN = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic raw_we, raw_wbank, raw_rbank, vr_we, vr_wbank, vr_rbank;
  logic [AW-1:0] raw_wa, raw_ra, vr_wa, vr_ra;
  coord_t raw_wx, raw_rx;
  slope_t raw_wsl, raw_rsl;
  cost_t vr_wd, vr_rd;
  bp_ram #(.BP_N(BPN)) dut (.*);

  coord_t ex [2][BPN];
  slope_t es [2][BPN];
  cost_t  ev [2][BPN];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raw_we = 0; vr_we = 0; raw_wbank = 0; raw_rbank = 0; vr_wbank = 0; vr_rbank = 0;
    raw_wa = '0; raw_ra = '0; vr_wa = '0; vr_ra = '0; raw_wx = '0; raw_wsl = '0; vr_wd = '0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < BPN; a++) begin
        @(negedge clk);
        raw_we = 1; vr_we = 1; raw_wbank = b[0]; vr_wbank = b[0]; raw_wa = AW'(a); vr_wa = AW'(a);
        raw_wx = coord_t'($urandom); raw_wsl = slope_t'($urandom); vr_wd = {$urandom, $urandom};
        ex[b][a] = raw_wx; es[b][a] = raw_wsl; ev[b][a] = vr_wd;
      end
    @(negedge clk); raw_we = 0; vr_we = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < BPN; a++) begin
        @(negedge clk); raw_rbank = b[0]; vr_rbank = ~b[0]; raw_ra = AW'(a); vr_ra = AW'(BPN - 1 - a);
        @(negedge clk);
        checks++; if (raw_rx != ex[b][a] || raw_rsl != es[b][a]) failures++;
        checks++; if (vr_rd != ev[1-b][BPN-1-a]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
