// ip_ram: Insertion Point RAM.
//
// Holds the insertion point descriptors of the current target cell, written
// by the host through the controller and read by the insertion point module.
// A descriptor gives the bottom row of the target, the range [x_lo, x_hi]
// its x may take and, for each target row, the interval index (number of
// cells of that row left of the gap); this layout is this design's choice.
// One write port; one synchronous read port (data one cycle after address).
module ip_ram
  import flex_pkg::*;
#(
  parameter int unsigned N_IP = N_IP_DEF
) (
  input  logic     clk,
  input  logic     we,
  input  logic [$clog2(N_IP)-1:0] waddr,
  input  ip_desc_t wdata,
  input  logic [$clog2(N_IP)-1:0] raddr,
  output ip_desc_t rdata
);
  ip_desc_t mem [N_IP];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
