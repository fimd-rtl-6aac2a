// fimd_ref_pkg: reference model used by the testbenches.
//
// circle_ref() builds the boundary table of a radius-rho circle with the
// textbook midpoint loop (plot the eight mirrored copies of each octant
// point while x <= y), written independently of the hardware FSM.
// detect_ref() applies the segment test to a whole frame held in memory:
// for every centre at least rho pixels away from each border, with P the
// centre value and B_min/B_max the extrema over the circle boundary,
//   marker    if P > T_m and P - B_max >= T_d,
//   sun point else if P > T_m, P > T_s and P - B_min < T_d.
// Results are listed in row-major order of their centres, the order in which
// the streaming hardware produces them. make_frame() fills a frame with a
// noisy dark background, small bright blobs (markers), one large saturated
// disk (sun) and a bright band along the right border.
package fimd_ref_pkg;

  typedef struct {
    bit kind;     // 0 marker, 1 sun point
    int row;
    int col;
  } det_t;

  // mask[x+7][y+7]
  typedef bit [14:0][14:0] cmask_t;

  function automatic cmask_t circle_ref(int rho);
    cmask_t m;
    int x, y, d;
    m = '0;
    x = 0;
    y = rho;
    d = 3 - 2 * rho;
    while (x <= y) begin
      m[7 + x][7 + y] = 1; m[7 - x][7 + y] = 1;
      m[7 + x][7 - y] = 1; m[7 - x][7 - y] = 1;
      m[7 + y][7 + x] = 1; m[7 - y][7 + x] = 1;
      m[7 + y][7 - x] = 1; m[7 - y][7 - x] = 1;
      x++;
      if (d > 0) begin
        y--;
        d = d + 4 * (x - y) + 10;
      end else begin
        d = d + 4 * x + 6;
      end
    end
    return m;
  endfunction

  function automatic int circle_count(cmask_t m);
    int n;
    n = 0;
    for (int i = 0; i < 15; i++)
      for (int j = 0; j < 15; j++)
        if (m[i][j]) n++;
    return n;
  endfunction

  function automatic void detect_ref(ref byte unsigned img[], input int w, input int h,
                                     input int rho, input int tm, input int ts,
                                     input int td, ref det_t out[$]);
    cmask_t m;
    int xs[$], ys[$];
    int p, bmax, bmin, v;
    m = circle_ref(rho);
    out.delete();
    for (int x = -rho; x <= rho; x++)
      for (int y = -rho; y <= rho; y++)
        if (m[7 + x][7 + y]) begin xs.push_back(x); ys.push_back(y); end
    for (int r = rho; r < h - rho; r++) begin
      for (int c = rho; c < w - rho; c++) begin
        p = img[r * w + c];
        bmax = 0;
        bmin = 255;
        if (p <= tm) continue;
        foreach (xs[k]) begin
          v = img[(r + ys[k]) * w + c + xs[k]];
          if (v > bmax) bmax = v;
          if (v < bmin) bmin = v;
        end
        if (p - bmax >= td) out.push_back('{kind: 0, row: r, col: c});
        else if (p > ts && p - bmin < td) out.push_back('{kind: 1, row: r, col: c});
      end
    end
  endfunction

  function automatic void put(ref byte unsigned img[], input int w, input int h,
                              input int r, input int c, input int v);
    if (r >= 0 && r < h && c >= 0 && c < w) img[r * w + c] = byte'(v);
  endfunction

  function automatic void plant_marker(ref byte unsigned img[], input int w, input int h,
                                       input int r, input int c);
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++)
        put(img, w, h, r + dr, c + dc, 150 + $urandom_range(0, 60));
    put(img, w, h, r, c, 230 + $urandom_range(0, 25));
  endfunction

  // n_mark markers at pseudo-random places, a sun disk of radius sun_r at
  // (sun_row, sun_col) (none if sun_r = 0), and a bright right border band.
  function automatic void make_frame(ref byte unsigned img[], input int w, input int h,
                                     input int n_mark, input int sun_r,
                                     input int sun_row, input int sun_col);
    img = new[w * h];
    for (int i = 0; i < w * h; i++) img[i] = byte'(20 + $urandom_range(0, 40));
    for (int k = 0; k < n_mark; k++) begin
      int r, c;
      r = $urandom_range(2, h - 3);
      c = $urandom_range(2, w - 3);
      plant_marker(img, w, h, r, c);
    end
    if (sun_r > 0)
      for (int dr = -sun_r; dr <= sun_r; dr++)
        for (int dc = -sun_r; dc <= sun_r; dc++)
          if (dr * dr + dc * dc <= sun_r * sun_r)
            put(img, w, h, sun_row + dr, sun_col + dc, 245 + $urandom_range(0, 10));
    for (int r = 0; r < h; r++) begin
      put(img, w, h, r, w - 1, 250);
      put(img, w, h, r, w - 2, 250);
    end
  endfunction

endpackage
