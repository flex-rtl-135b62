// flex_ref_pkg: software reference for the FLEX testbenches.
//
// Holds one random localRegion (cells with x, y, w, h and the per-row cell
// lists), generates random insertion points for it and computes, without
// any of the hardware's ordering tricks:
//   - ref_shift: the positions after left-move and right-move, by repeating
//     pairwise overlap pushes over all rows until nothing changes (the
//     multi-pass method the sort-ahead algorithm replaces);
//   - ref_fop: the best target x in [x_lo, x_hi] and its total displacement,
//     by evaluating every integer x (largest x wins a tie).
package flex_ref_pkg;
  import flex_pkg::*;

  localparam int MAXC = 2048;
  localparam int MAXR = 256;
  localparam int MAXS = 256;

  int nc, nr;
  int cx [MAXC], cy [MAXC], cw [MAXC], ch [MAXC];
  int rlen [MAXR];
  int rlist [MAXR][MAXS];
  int sorted_idx [MAXC];       // cells by x (stable on index)

  // random region: `ncells` cells over `nrows` rows, heights 1..hmax
  function automatic void gen_region(int ncells, int nrows, int hmax, int maxgap);
    int cur [MAXR];
    nr = nrows;
    nc = 0;
    for (int r = 0; r < nrows; r++) begin cur[r] = int'($urandom_range(0, 3)); rlen[r] = 0; end
    while (nc < ncells) begin
      int h, r, x;
      h = int'($urandom_range(1, hmax));
      if (h > nrows) h = nrows;
      r = int'($urandom_range(0, nrows - h));
      x = 0;
      for (int q = r; q < r + h; q++) if (cur[q] > x) x = cur[q];
      // skip if any of these rows is full
      begin
        bit full = 0;
        for (int q = r; q < r + h; q++) if (rlen[q] >= MAXS) full = 1;
        if (full) continue;
      end
      x += int'($urandom_range(0, maxgap));
      cx[nc] = x; cy[nc] = r; ch[nc] = h; cw[nc] = int'($urandom_range(1, 6));
      for (int q = r; q < r + h; q++) begin
        cur[q] = x + cw[nc];
        rlist[q][rlen[q]] = nc;
        rlen[q]++;
      end
      nc++;
    end
    // order by x for Cell_sort (any order among equal x is acceptable)
    for (int i = 0; i < nc; i++) sorted_idx[i] = i;
    for (int i = 1; i < nc; i++) begin
      int v = sorted_idx[i];
      int j = i - 1;
      while (j >= 0 && cx[sorted_idx[j]] > cx[v]) begin sorted_idx[j+1] = sorted_idx[j]; j--; end
      sorted_idx[j+1] = v;
    end
  endfunction

  function automatic lct_entry_t lct_of(int i);
    lct_entry_t e;
    e.x = coord_t'(cx[i]); e.y = 32'(cy[i]); e.w = 20'(cw[i]); e.h = 12'(ch[i]); e.f = 4'(i);
    return e;
  endfunction

  // random insertion point for a target of height th around column xt
  function automatic ip_desc_t gen_ip(int id, int th, int span);
    ip_desc_t d;
    int xt, maxx;
    maxx = 0;
    for (int i = 0; i < nc; i++) if (cx[i] + cw[i] > maxx) maxx = cx[i] + cw[i];
    d = '0;
    d.id   = IP_W'(id);
    d.row0 = seg_t'($urandom_range(0, nr - th));
    xt     = int'($urandom_range(0, maxx));
    d.x_lo = coord_t'(xt - int'($urandom_range(0, span)));
    d.x_hi = coord_t'(xt + int'($urandom_range(0, span)));
    for (int t = 0; t < th; t++) begin
      int r = int'(d.row0) + t, n = 0;
      for (int s = 0; s < rlen[r]; s++) if (cx[rlist[r][s]] < xt) n = s + 1;
      d.ins[t] = INS_W'(n);
    end
    return d;
  endfunction

  // is pair (slot s, slot s+1) of row r inside the part that moves in this phase
  function automatic bit pair_active(int r, int s, ip_desc_t d, int th, bit right);
    int t = r - int'(d.row0);
    if (t < 0 || t >= th) return 1;
    if (!right) return (s + 1 < int'(d.ins[t]));
    return (s >= int'(d.ins[t]));
  endfunction

  function automatic void ref_shift(ip_desc_t d, target_t tg, output int pl [MAXC], output int pr [MAXC]);
    bit changed;
    int th = int'(tg.h);
    for (int i = 0; i < nc; i++) begin pl[i] = cx[i]; pr[i] = cx[i]; end
    // left-move
    do begin
      changed = 0;
      for (int r = 0; r < nr; r++) begin
        int t = r - int'(d.row0);
        if (t >= 0 && t < th && d.ins[t] != 0) begin
          int a = rlist[r][int'(d.ins[t]) - 1];
          if (pl[a] + cw[a] > int'(d.x_lo)) begin pl[a] = int'(d.x_lo) - cw[a]; changed = 1; end
        end
        for (int s = 0; s + 1 < rlen[r]; s++) if (pair_active(r, s, d, th, 0)) begin
          int a = rlist[r][s], b = rlist[r][s+1];
          if (pl[a] + cw[a] > pl[b]) begin pl[a] = pl[b] - cw[a]; changed = 1; end
        end
      end
    end while (changed);
    // right-move
    do begin
      changed = 0;
      for (int r = 0; r < nr; r++) begin
        int t = r - int'(d.row0);
        if (t >= 0 && t < th && int'(d.ins[t]) < rlen[r]) begin
          int b = rlist[r][int'(d.ins[t])];
          if (int'(d.x_hi) + int'(tg.w) > pr[b]) begin pr[b] = int'(d.x_hi) + int'(tg.w); changed = 1; end
        end
        for (int s = 0; s + 1 < rlen[r]; s++) if (pair_active(r, s, d, th, 1)) begin
          int a = rlist[r][s], b = rlist[r][s+1];
          if (pr[a] + cw[a] > pr[b]) begin pr[b] = pr[a] + cw[a]; changed = 1; end
        end
      end
    end while (changed);
  endfunction

  // total displacement of the target at xt, using the curves of one shift
  function automatic longint cost_at(int xt, ip_desc_t d, target_t tg, const ref int pl [MAXC], const ref int pr [MAXC]);
    longint v = 0;
    v += (xt > int'(tg.gx)) ? longint'(xt - int'(tg.gx)) : longint'(int'(tg.gx) - xt);
    for (int i = 0; i < nc; i++) begin
      if (pl[i] != cx[i]) begin
        int bp = cx[i] + int'(d.x_lo) - pl[i];
        if (bp > xt) v += longint'(bp - xt);
      end
      if (pr[i] != cx[i]) begin
        int bp = cx[i] + int'(d.x_hi) - pr[i];
        if (xt > bp) v += longint'(xt - bp);
      end
    end
    return v;
  endfunction

  function automatic void ref_fop(ip_desc_t d, target_t tg, output longint best, output int bx);
    int pl [MAXC], pr [MAXC];
    ref_shift(d, tg, pl, pr);
    best = 64'h7fff_ffff_ffff_ffff;
    bx = int'(d.x_lo);
    for (int xt = int'(d.x_lo); xt <= int'(d.x_hi); xt++) begin
      longint v = cost_at(xt, d, tg, pl, pr);
      if (v <= best) begin best = v; bx = xt; end
    end
  endfunction

endpackage
