// tb_sync_module: random results from two PEs, sometimes in the same cycle,
// are fed to the Synchronization Module; after each cycle its best result
// is compared with a running minimum kept in the testbench (lowest cost,
// then lowest insertion point number). `clear` is pulsed between groups.
module tb_sync_module;
  import flex_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, best_valid;
  logic res_valid [2];
  fop_result_t res [2], best;
  sync_module #(.N_PE(2)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit ev; fop_result_t eb;
  initial begin
    clear = 0; res_valid[0] = 0; res_valid[1] = 0; res[0] = '0; res[1] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int g = 0; g < 40; g++) begin
      @(negedge clk); clear = 1; ev = 0;
      @(negedge clk); clear = 0;
      checks++; if (best_valid) begin failures++; $display("FAIL: best valid after clear"); end
      for (int k = 0; k < 12; k++) begin
        for (int p = 0; p < 2; p++) begin
          res_valid[p] = ($urandom_range(0, 2) != 0);
          res[p].cost = cost_t'($urandom_range(0, 6));
          res[p].x    = coord_t'($urandom_range(0, 1000));
          res[p].id   = IP_W'($urandom_range(0, 40));
          if (res_valid[p] && (!ev || res[p].cost < eb.cost || (res[p].cost == eb.cost && res[p].id < eb.id))) begin
            ev = 1; eb = res[p];
          end
        end
        @(negedge clk); res_valid[0] = 0; res_valid[1] = 0;
        checks++;
        if (best_valid != ev || (ev && best != eb)) begin
          failures++; $display("FAIL: best %0d/%0d/%0d expected %0d/%0d/%0d", best.cost, best.x, best.id, eb.cost, eb.x, eb.id);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
