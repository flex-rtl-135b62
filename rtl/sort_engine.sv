// sort_engine: insertion + merge sorter for key/payload pairs.
//
// Used twice in the design: as the Ahead Sorter, which orders the localCells
// of a region by x to build Cell_sort, and inside each FOP PE as the Sorter
// that orders breakpoints by x. The two-stage structure (insertion sorter for
// short runs, merge sorter for the rest) follows the accelerator description;
// run length, buffering and timing are this design's choices.
//
// Operation: elements arrive on in_valid/in_ready. An insertion sorter of RUN
// registers keeps a sorted run; every inserted element takes one cycle. When
// the run is full, or in_last arrives, the run is written out to buffer 0 at
// one element per cycle (in_ready is low meanwhile). After the last run,
// bottom-up merge passes copy between buffer 0 and buffer 1, doubling the run
// width each pass, one element per cycle. The sorted set then streams out on
// out_valid (one element per cycle, no back-pressure) with out_last on the
// final element. Sorting is ascending on a signed key and stable.
// Timing for n elements: about 2n cycles of input, n cycles per merge pass
// (ceil(log2(n/RUN)) passes), then n output cycles.
// Buffers are read asynchronously (distributed RAM) so the merge loop issues
// one compare per cycle.
module sort_engine #(
  parameter int unsigned N      = 2048,
  parameter int unsigned RUN    = 8,
  parameter int unsigned KEY_W  = 32,
  parameter int unsigned DATA_W = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [KEY_W-1:0]  in_key,
  input  logic [DATA_W-1:0] in_data,
  input  logic              in_last,
  output logic              out_valid,
  output logic [KEY_W-1:0]  out_key,
  output logic [DATA_W-1:0] out_data,
  output logic              out_last,
  output logic              busy
);
  localparam int unsigned AW = $clog2(N) + 1;   // counts 0..N
  localparam int unsigned RW = $clog2(RUN) + 1;   // RUN must be a power of two

  typedef struct packed {
    logic [KEY_W-1:0]  key;
    logic [DATA_W-1:0] data;
  } elem_t;

  typedef enum logic [2:0] {S_IN, S_FLUSH, S_MERGE, S_OUT} state_e;
  state_e state;

  elem_t buf0 [N];
  elem_t buf1 [N];
  elem_t run_q [RUN];
  logic [RW-1:0] run_cnt, flush_i;
  logic          last_seen;
  logic [AW-1:0] n, base;               // elements stored / next run base
  logic [AW-1:0] width, mid, hi, i, j, k;
  logic          sel;                   // buffer holding the current runs

  function automatic logic [AW-1:0] amin(logic [AW-1:0] a, logic [AW-1:0] b);
    return (a < b) ? a : b;
  endfunction

  // ---- insertion of a new element into the run registers ----
  elem_t new_e;
  elem_t run_d [RUN];
  always_comb begin
    new_e = '{key: in_key, data: in_data};
    for (int p = 0; p < RUN; p++) begin
      // element p of the new run: keep old one, take new one, or shift
      logic le_p, le_pm1;
      le_p   = (p < int'(run_cnt)) && ($signed(run_q[p].key) <= $signed(in_key));
      le_pm1 = (p == 0) ? 1'b1
             : ((p - 1 < int'(run_cnt)) && ($signed(run_q[p-1].key) <= $signed(in_key)));
      if (le_p)             run_d[p] = run_q[p];
      else if (le_pm1)      run_d[p] = new_e;
      else                  run_d[p] = run_q[(p == 0) ? 0 : p - 1];
    end
  end

  // ---- merge selection ----
  elem_t src_i, src_j, take;
  logic  take_i;
  always_comb begin
    src_i  = sel ? buf1[i[AW-2:0]] : buf0[i[AW-2:0]];
    src_j  = sel ? buf1[j[AW-2:0]] : buf0[j[AW-2:0]];
    take_i = (i < mid) && ((j >= hi) || ($signed(src_i.key) <= $signed(src_j.key)));
    take   = take_i ? src_i : src_j;
  end

  elem_t out_e;
  assign out_e     = sel ? buf1[k[AW-2:0]] : buf0[k[AW-2:0]];
  assign in_ready  = (state == S_IN);
  assign out_valid = (state == S_OUT);
  assign out_key   = out_e.key;
  assign out_data  = out_e.data;
  assign out_last  = (state == S_OUT) && (k == n - 1'b1);
  assign busy      = (state != S_IN) || (n != '0) || (run_cnt != '0);

  // values for starting a merge pass (or the output) over `bm_total`
  // elements with run width `bm_w`
  logic [AW-1:0] bm_total, bm_w;
  always_comb begin
    if (state == S_FLUSH) begin
      bm_total = base + AW'(run_cnt);
      bm_w     = AW'(RUN);
    end else begin
      bm_total = n;
      bm_w     = width << 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IN;
      run_cnt   <= '0;
      flush_i   <= '0;
      last_seen <= 1'b0;
      n         <= '0;
      base      <= '0;
      width     <= AW'(RUN);
      mid <= '0; hi <= '0; i <= '0; j <= '0; k <= '0;
      sel       <= 1'b0;
    end else begin
      unique case (state)
        S_IN: if (in_valid) begin
          for (int p = 0; p < RUN; p++) run_q[p] <= run_d[p];
          run_cnt   <= run_cnt + 1'b1;
          last_seen <= in_last;
          if (in_last || (run_cnt + 1'b1 == RW'(RUN))) begin
            state   <= S_FLUSH;
            flush_i <= '0;
          end
        end
        S_FLUSH: begin
          buf0[base[AW-2:0] + (AW-1)'(flush_i)] <= run_q[flush_i[RW-2:0]];
          if (flush_i + 1'b1 == run_cnt) begin
            base    <= base + AW'(run_cnt);
            n       <= base + AW'(run_cnt);
            run_cnt <= '0;
            if (last_seen) begin
              sel   <= 1'b0;
              width <= AW'(RUN);
              i     <= '0;
              k     <= '0;
              mid   <= amin(bm_w, bm_total);
              j     <= amin(bm_w, bm_total);
              hi    <= amin(bm_w << 1, bm_total);
              state <= (bm_w >= bm_total) ? S_OUT : S_MERGE;
            end else begin
              state <= S_IN;
            end
          end else begin
            flush_i <= flush_i + 1'b1;
          end
        end
        S_MERGE: begin
          if (sel) buf0[k[AW-2:0]] <= take;
          else     buf1[k[AW-2:0]] <= take;
          if (take_i) i <= i + 1'b1;
          else        j <= j + 1'b1;
          if (k + 1'b1 == hi) begin
            if (hi >= n) begin
              // pass complete
              sel   <= ~sel;
              width <= width << 1;
              i     <= '0;
              k     <= '0;
              mid   <= amin(bm_w, bm_total);
              j     <= amin(bm_w, bm_total);
              hi    <= amin(bm_w << 1, bm_total);
              state <= (bm_w >= bm_total) ? S_OUT : S_MERGE;
            end else begin
              i   <= hi;
              k   <= hi;
              mid <= amin(hi + width, n);
              j   <= amin(hi + width, n);
              hi  <= amin(hi + (width << 1), n);
            end
          end else begin
            k <= k + 1'b1;
          end
        end
        S_OUT: begin
          if (k == n - 1'b1) begin
            state     <= S_IN;
            n         <= '0;
            base      <= '0;
            last_seen <= 1'b0;
          end
          k <= k + 1'b1;
        end
        default: state <= S_IN;
      endcase
    end
  end

endmodule
