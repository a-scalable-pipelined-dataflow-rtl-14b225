// bing_ref_pkg: software reference of the BING accelerator's arithmetic, used
// by the testbenches to compute expected results independently of the RTL.
//
// It works on whole 2-D arrays, the way the algorithm is written down:
// nearest-neighbour resize, normed gradient with replicated borders, 8x8 SVM
// scores, best window of every complete non-overlapping 5x5 block of the
// score map, per-scale calibration and top-K selection. Nothing here is
// streamed, so a mistake in the RTL's line buffers or windows shows up as a
// mismatch.
package bing_ref_pkg;
  import bing_pkg::*;

  localparam int RMAX = 256;

  rgb_t       orig [IMG_MAX_H][IMG_MAX_W];
  rgb_t       rimg [RMAX][RMAX];
  int         gmap [RMAX][RMAX];
  int         smap [RMAX][RMAX];
  int         wgt  [64];
  cand_t      cands[$];

  function automatic int rdist(rgb_t a, rgb_t b);
    int dr, dg, db, m;
    dr = int'(a.r) - int'(b.r); if (dr < 0) dr = -dr;
    dg = int'(a.g) - int'(b.g); if (dg < 0) dg = -dg;
    db = int'(a.b) - int'(b.b); if (db < 0) db = -db;
    m = dr; if (dg > m) m = dg; if (db > m) m = db;
    return m;
  endfunction

  function automatic int clampi(int v, int lo, int hi);
    if (v < lo) return lo;
    if (v > hi) return hi;
    return v;
  endfunction

  // nearest-neighbour resize of orig into rimg
  function automatic void ref_resize(int h, int w, longint sx, longint sy);
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++)
        rimg[r][c] = orig[int'((longint'(r) * sy) >> 16)][int'((longint'(c) * sx) >> 16)];
  endfunction

  function automatic void ref_grad(int h, int w);
    int ix, iy;
    for (int i = 0; i < h; i++)
      for (int j = 0; j < w; j++) begin
        ix = rdist(rimg[clampi(i-1,0,h-1)][j], rimg[clampi(i+1,0,h-1)][j]);
        iy = rdist(rimg[i][clampi(j-1,0,w-1)], rimg[i][clampi(j+1,0,w-1)]);
        gmap[i][j] = (ix + iy > 255) ? 255 : ix + iy;
      end
  endfunction

  function automatic void ref_score(int h, int w);
    int s;
    for (int r = 0; r <= h - 8; r++)
      for (int c = 0; c <= w - 8; c++) begin
        s = 0;
        for (int dy = 0; dy < 8; dy++)
          for (int dx = 0; dx < 8; dx++)
            s += gmap[r+dy][c+dx] * wgt[dy*8+dx];
        smap[r][c] = s;
      end
  endfunction

  // candidates in the order the hardware emits them (block row, block column)
  function automatic void ref_nms(int h, int w);
    int sh, sw, br, bc;
    cand_t c;
    sh = h - 7; sw = w - 7;
    cands.delete();
    for (int tr = 0; tr < sh / 5; tr++)
      for (int tc = 0; tc < sw / 5; tc++) begin
        br = tr * 5; bc = tc * 5;
        for (int r = tr * 5; r < tr * 5 + 5; r++)
          for (int cc = tc * 5; cc < tc * 5 + 5; cc++)
            if (smap[r][cc] > smap[br][bc]) begin br = r; bc = cc; end
        c.score = SCORE_W'(smap[br][bc]);
        c.row   = COORD_W'(br);
        c.col   = COORD_W'(bc);
        cands.push_back(c);
      end
  endfunction

  function automatic void ref_kernel(int h, int w);
    ref_grad(h, w);
    ref_score(h, w);
    ref_nms(h, w);
  endfunction

  function automatic longint svm2_score(int s, int v, int t);
    return ((longint'(s) * longint'(v)) >>> 8) + longint'(t);
  endfunction

endpackage
