// sgm_ref_pkg: bit-exact software reference of the streaming SGM pipeline,
// written independently of the RTL from the algorithm's equations, for the
// testbenches.
//
// Conventions it shares with the hardware by specification (not by code):
//   * census window of the k-th streamed pixel (x, y) covers rows y-K+1..y and
//     columns x-K+1..x, zero outside the image; bit i of the census string is
//     1 when the centre is greater than the i-th neighbour in raster order,
//     centre skipped;
//   * C(n,d) = popcount(CT_b[n] ^ CT_m[n-d]) over the stream index n = y*W+x,
//     with CT_m = 0 before the first pixel;
//   * four paths: 0 deg from (x-1,y), 45 from (x-1,y-1), 90 from (x,y-1),
//     135 from (x+1,y-1); a path without a predecessor restarts (L = C);
//   * WTA picks the smallest disparity among equal minima;
//   * K x K median over the causal zero-padded window of the disparity map.
package sgm_ref_pkg;

  typedef int unsigned img_t [];   // W*H intensities, raster order
  typedef int iarr_t [];

  function automatic longint unsigned census_at(input img_t img, input int w, input int h,
                                                input int x, input int y, input int k);
    longint unsigned ct;
    int r0, c0, i, cv;
    int v [];
    v = new[k*k];
    r0 = y - k + 1;
    c0 = x - k + 1;
    for (int r = 0; r < k; r++)
      for (int c = 0; c < k; c++)
        v[r*k+c] = (r0 + r < 0 || c0 + c < 0) ? 0 : int'(img[(r0 + r) * w + c0 + c]);
    cv = v[((k-1)/2)*k + (k-1)/2];
    ct = 0;
    i = 0;
    for (int j = 0; j < k*k; j++) begin
      if (j != ((k-1)/2)*k + (k-1)/2) begin
        if (cv > v[j]) ct |= (64'd1 << i);
        i++;
      end
    end
    return ct;
  endfunction

  function automatic int popc(input longint unsigned v);
    int n;
    n = 0;
    for (int i = 0; i < 64; i++) n += int'(v[i]);
    return n;
  endfunction

  // Mechanism counters filled by sgm_disparity (which recursion term won).
  int unsigned n_same, n_p1, n_p2, n_restart;

  // Four-path aggregation of a cost volume cost[n*dmax+d] over a w x h frame;
  // returns S in s[n*dmax+d].
  function automatic iarr_t sgm_aggregate(input iarr_t cost, input int w, input int h,
                                          input int dmax, input int p1, input int p2);
    int s [];
    int lprev [4][], lcur [4][];   // [dir][x*dmax+d] rows of path costs
    int l0 [], l0n [];             // 0-degree costs of the left pixel
    s = new[w*h*dmax];
    for (int r = 0; r < 4; r++) begin
      lprev[r] = new[w*dmax];
      lcur[r]  = new[w*dmax];
    end
    l0 = new[dmax];
    l0n = new[dmax];
    for (int y = 0; y < h; y++) begin
      for (int x = 0; x < w; x++) begin
        int idx;
        idx = y*w + x;
        for (int r = 0; r < 4; r++) begin
          int px, pm;
          bit ok;
          case (r)
            0: begin ok = (x > 0);               px = x - 1; end
            1: begin ok = (y > 0) && (x > 0);    px = x - 1; end
            2: begin ok = (y > 0);               px = x;     end
            default: begin ok = (y > 0) && (x + 1 < w); px = x + 1; end
          endcase
          pm = 32'h7fffffff;
          if (ok)
            for (int d = 0; d < dmax; d++) begin
              int pv;
              pv = (r == 0) ? l0[d] : lprev[r][px*dmax + d];
              if (pv < pm) pm = pv;
            end
          for (int d = 0; d < dmax; d++) begin
            int l, c;
            c = cost[idx*dmax + d];
            if (!ok) begin
              l = c;
              n_restart++;
            end else begin
              int a, b, cc, e, m;
              a = (r == 0) ? l0[d] : lprev[r][px*dmax + d];
              b = (d > 0) ? ((r == 0) ? l0[d-1] : lprev[r][px*dmax + d - 1]) + p1 : 32'h7fffffff;
              cc = (d < dmax-1) ? ((r == 0) ? l0[d+1] : lprev[r][px*dmax + d + 1]) + p1 : 32'h7fffffff;
              e = pm + p2;
              m = a;
              if (b < m) m = b;
              if (cc < m) m = cc;
              if (e < m) m = e;
              if (m == a) n_same++;
              else if (m == e) n_p2++;
              else n_p1++;
              l = c + m - pm;
            end
            if (r == 0) l0n[d] = l;
            else lcur[r][x*dmax + d] = l;
            if (r == 0) s[idx*dmax + d] = l;
            else s[idx*dmax + d] += l;
          end
        end
        for (int d = 0; d < dmax; d++) l0[d] = l0n[d];
      end
      for (int r = 1; r < 4; r++) begin
        lprev[r] = lcur[r];
        lcur[r] = new[w*dmax];
      end
    end
    return s;
  endfunction

  // Census cost volume of a frame pair.
  // prev_match: the match image of the previous frame of the stream (empty
  // right after reset), whose census strings the first disparities reach.
  function automatic iarr_t census_volume(input img_t base, input img_t match,
                                          input img_t prev_match,
                                          input int w, input int h, input int k,
                                          input int dmax);
    int cost [];
    longint unsigned ctb [], ctm [];
    int n;
    n = w * h;
    ctb = new[n];
    ctm = new[n];
    cost = new[n*dmax];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        ctb[y*w+x] = census_at(base, w, h, x, y, k);
        ctm[y*w+x] = census_at(match, w, h, x, y, k);
      end
    for (int idx = 0; idx < n; idx++)
      for (int d = 0; d < dmax; d++) begin
        if (idx - d >= 0) cost[idx*dmax+d] = popc(ctb[idx] ^ ctm[idx - d]);
        else if (prev_match.size() == 0) cost[idx*dmax+d] = popc(ctb[idx]);
        else cost[idx*dmax+d] = popc(ctb[idx] ^ census_at(prev_match, w, h, (n + idx - d) % w,
                                                          (n + idx - d) / w, k));
      end
    return cost;
  endfunction

  // Winner takes all: smallest disparity among equal minima.
  function automatic iarr_t wta(input iarr_t s, input int n, input int dmax);
    int disp [];
    disp = new[n];
    for (int i = 0; i < n; i++) begin
      int bs;
      bs = 32'h7fffffff;
      disp[i] = 0;
      for (int d = 0; d < dmax; d++)
        if (s[i*dmax + d] < bs) begin
          bs = s[i*dmax + d];
          disp[i] = d;
        end
    end
    return disp;
  endfunction

  // Full reference: the WTA disparity per streamed pixel.
  function automatic iarr_t sgm_disparity(input img_t base, input img_t match,
                                          input img_t prev_match,
                                          input int w, input int h, input int k,
                                          input int dmax, input int p1, input int p2);
    iarr_t cost, s;
    cost = census_volume(base, match, prev_match, w, h, k, dmax);
    s = sgm_aggregate(cost, w, h, dmax, p1, p2);
    return wta(s, w*h, dmax);
  endfunction

  // Causal zero-padded K x K median of a raster map.
  function automatic int median_at(input iarr_t m, input int w, input int x, input int y,
                                   input int k);
    int v [$];
    for (int r = y - k + 1; r <= y; r++)
      for (int c = x - k + 1; c <= x; c++)
        v.push_back((r < 0 || c < 0) ? 0 : m[r*w + c]);
    v.sort();
    return v[(k*k-1)/2];
  endfunction

endpackage
