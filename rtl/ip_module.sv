// ip_module: Insertion Point Module.
//
// After `start` it reads descriptors 0 .. num_ip-1 from the insertion point
// RAM, stamps each with its number, and hands it to the first FOP PE that is
// ready (lowest index wins), so the PEs work on different insertion points
// of the same target at once. It counts the results the PEs return and
// pulses `done` when all have come back. Reading descriptors that the host
// prepared (rather than enumerating insertion points itself) is this
// design's choice.
// Timing: one descriptor is fetched per hand-over; a fetch takes one cycle
// (synchronous RAM), so a descriptor can be handed out every second cycle.
module ip_module
  import flex_pkg::*;
#(
  parameter int unsigned N_PE = 2,
  parameter int unsigned N_IP = N_IP_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [$clog2(N_IP):0] num_ip,
  output logic [$clog2(N_IP)-1:0] raddr,
  input  ip_desc_t    rdata,
  output logic        pe_valid [N_PE],
  input  logic        pe_ready [N_PE],
  output ip_desc_t    pe_ip,
  input  logic        res_valid [N_PE],
  output logic        running,
  output logic        done
);
  localparam int unsigned AW = $clog2(N_IP);

  logic [AW:0] issued, returned, total;
  logic        fetch, hold_v;
  ip_desc_t    hold;
  logic [AW-1:0] hold_id;

  // PE that takes the held descriptor
  logic        take;
  always_comb begin
    take = 1'b0;
    for (int p = 0; p < int'(N_PE); p++) begin
      pe_valid[p] = 1'b0;
      if (hold_v && pe_ready[p] && !take) begin
        pe_valid[p] = 1'b1;
        take = 1'b1;
      end
    end
  end

  always_comb begin
    pe_ip    = hold;
    pe_ip.id = IP_W'(hold_id);
  end
  assign raddr = issued[AW-1:0];

  // number of results arriving this cycle
  logic [$clog2(N_PE+1)-1:0] n_ret;
  always_comb begin
    n_ret = '0;
    for (int p = 0; p < int'(N_PE); p++) n_ret += $bits(n_ret)'(res_valid[p]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issued <= '0; returned <= '0; total <= '0; fetch <= 1'b0; hold_v <= 1'b0; hold <= '0; hold_id <= '0;
      running <= 1'b0; done <= 1'b0;
    end else begin
      done  <= 1'b0;
      fetch <= 1'b0;
      if (start) begin
        issued <= '0; returned <= '0; total <= num_ip; hold_v <= 1'b0;
        running <= (num_ip != '0);
        done    <= (num_ip == '0);
      end else if (running) begin
        // fetch the next descriptor when nothing is held or it is being taken
        if (!fetch && issued < total && (!hold_v || take)) begin
          fetch  <= 1'b1;
          issued <= issued + 1'b1;
        end
        if (take) hold_v <= 1'b0;
        if (fetch) begin
          hold    <= rdata;
          hold_id <= AW'(issued - 1'b1);
          hold_v  <= 1'b1;
        end
        returned <= returned + (AW+1)'(n_ret);
        if (returned + (AW+1)'(n_ret) == total) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
