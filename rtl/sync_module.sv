// sync_module: Synchronization Module of the FOP PE cluster.
//
// The FOP PEs evaluate different insertion points of the same target cell
// at the same time. Every result that arrives (any number per cycle) is
// compared with the best one so far, and the smaller total displacement is
// kept; `clear` starts a new target. Equal displacements are resolved to the
// lower insertion point number so the outcome does not depend on which PE
// finished first (this tie rule is this design's choice).
// Timing: results seen in cycle t are reflected in `best` from cycle t+1.
module sync_module
  import flex_pkg::*;
#(
  parameter int unsigned N_PE = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        res_valid [N_PE],
  input  fop_result_t res [N_PE],
  output logic        best_valid,
  output fop_result_t best
);
  function automatic logic better(cost_t ca, logic [IP_W-1:0] ia, cost_t cb, logic [IP_W-1:0] ib);
    return (ca < cb) || ((ca == cb) && (ia < ib));
  endfunction

  logic        nv;
  fop_result_t nb;
  always_comb begin
    nv = best_valid;
    nb = best;
    for (int p = 0; p < int'(N_PE); p++) begin
      if (res_valid[p] && (!nv || better(res[p].cost, res[p].id, nb.cost, nb.id))) begin
        nv = 1'b1;
        nb = res[p];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_valid <= 1'b0;
      best       <= '0;
    end else if (clear) begin
      best_valid <= 1'b0;
    end else begin
      best_valid <= nv;
      best       <= nb;
    end
  end
endmodule
