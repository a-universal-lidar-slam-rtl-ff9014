// csm_ref_pkg: reference model of correlative scan matching, for testbenches.
//
// It holds up to NSLOT independent problems (map, scan, parameters) and
// computes the answer of the paper's sequential Algorithm 1 directly:
// indices with real-valued cos/sin (not the CORDIC of the RTL), coarse map by
// brute-force window maxima, coarse-to-fine search with pruning and strict
// "greater than" updates. Map values are stored as the 8-bit input bytes and
// quantised to 6 bits on use, like the hardware.
//
// Because the RTL computes indices in fixed point, a point whose real-valued
// index lies within MARGIN of a cell boundary could legitimately land in
// either cell. make_scan() draws scan points and redraws every point that is
// that close to a boundary for any n_theta in the window, so the reference is
// exact for the scans it generates.
package csm_ref_pkg;

  localparam int MAXW   = 320;
  localparam int MAXN   = 512;
  localparam int NSLOT  = 2;
  localparam int W      = 8;
  localparam real MARGIN = 0.02;

  typedef struct {
    int map_w, map_h, n;
    int win_x, win_y, win_t;
    int pose_x, pose_y, pose_t, step_t, inv_res;   // Q16.16
  } prob_t;

  prob_t       P     [NSLOT];
  byte unsigned mapb [NSLOT][MAXW][MAXW];          // [y][x], 8-bit input values
  int          rng   [NSLOT][MAXN];                // Q16.16 as the core holds them
  int          ang   [NSLOT][MAXN];
  logic [31:0] rng_f [NSLOT][MAXN];                // single-precision bits sent
  logic [31:0] ang_f [NSLOT][MAXN];
  int          ci    [MAXN];
  int          cj    [MAXN];

  function automatic real q16(input int v);
    return real'(v) / 65536.0;
  endfunction

  function automatic int m6(input int s, input int x, input int y);
    if (x < 0 || y < 0 || x >= P[s].map_w || y >= P[s].map_h) return 0;
    return int'(mapb[s][y][x]) >> 2;
  endfunction

  function automatic int coarse(input int s, input int x, input int y);
    int m;
    if (x < 0 || y < 0 || x >= P[s].map_w || y >= P[s].map_h) return 0;
    m = 0;
    for (int dy = 0; dy < W; dy++)
      for (int dx = 0; dx < W; dx++)
        if (m6(s, x + dx, y + dy) > m) m = m6(s, x + dx, y + dy);
    return m;
  endfunction

  // real-valued index of point k for rotation step nt; axis 0 = x, 1 = y
  function automatic real idx_real(input int s, input int k, input int nt, input int axis);
    real phi, c;
    phi = q16(ang[s][k]) + q16(P[s].pose_t) + q16(P[s].step_t) * real'(nt);
    c   = (axis == 0) ? q16(rng[s][k]) * $cos(phi) + q16(P[s].pose_x)
                      : q16(rng[s][k]) * $sin(phi) + q16(P[s].pose_y);
    return c * q16(P[s].inv_res);
  endfunction

  // IEEE-754 single-precision bits of a Q16.16 value (exact when the value
  // has at most 24 significant bits, which holds for the scans drawn here)
  function automatic logic [31:0] q16_to_single(input int v);
    logic        sgn;
    logic [31:0] mag;
    int          msb;
    logic [22:0] frac;
    if (v == 0) return 32'h0;
    sgn = (v < 0);
    mag = sgn ? 32'(-v) : 32'(v);
    msb = 31;
    while (!mag[msb]) msb--;
    // value = mag * 2^-16, leading one at bit msb -> exponent msb - 16
    if (msb >= 23) frac = 23'(mag >> (msb - 23));
    else           frac = 23'(mag << (23 - msb));
    return {sgn, 8'(msb - 16 + 127), frac};
  endfunction

  function automatic bit near_edge(input real v);
    real f;
    f = v - $floor(v);
    return (f < MARGIN) || (f > 1.0 - MARGIN);
  endfunction

  function automatic int to_q16(input real v);
    return int'($rtoi(v * 65536.0));
  endfunction

  // Draw scan points: ranges in [rmin, rmax) metres, angles in [-pi, pi).
  // The float sent is exactly representable in Q16.16, so float-to-fixed
  // conversion is exact.
  function automatic void make_scan(input int s, input real rmin, input real rmax);
    for (int k = 0; k < P[s].n; k++) begin
      bit ok;
      int tries;
      tries = 0;
      do begin
        real r, a;
        r = rmin + (rmax - rmin) * (real'($urandom_range(0, 65535)) / 65536.0);
        a = -3.14159 + 6.28318 * (real'($urandom_range(0, 65535)) / 65536.0);
        rng[s][k]   = to_q16(r);
        ang[s][k]   = to_q16(a);
        rng_f[s][k] = q16_to_single(rng[s][k]);
        ang_f[s][k] = q16_to_single(ang[s][k]);
        ok = 1'b1;
        for (int nt = -P[s].win_t; nt < P[s].win_t; nt++)
          if (near_edge(idx_real(s, k, nt, 0)) || near_edge(idx_real(s, k, nt, 1))) ok = 1'b0;
        tries++;
      end while (!ok && tries < 1000);
    end
  endfunction

  // Draw scan points of which about pct_on % lie on map cells of value >= 200
  // as seen from the pose (so that the true offset scores high); the others
  // are drawn as in make_scan. Points near a cell edge are redrawn.
  function automatic void make_scan_on_map(input int s, input int pct_on, input real rmin, input real rmax);
    for (int k = 0; k < P[s].n; k++) begin
      bit ok;
      int tries;
      tries = 0;
      do begin
        real r, a;
        if ($urandom_range(0, 99) < pct_on) begin
          int cx, cy, guard;
          real dx, dy;
          guard = 0;
          do begin
            cx = $urandom_range(0, P[s].map_w - 1);
            cy = $urandom_range(0, P[s].map_h - 1);
            guard++;
          end while (mapb[s][cy][cx] < 200 && guard < 100000);
          dx = (real'(cx) + 0.3 + 0.4 * real'($urandom_range(0, 99)) / 100.0) / q16(P[s].inv_res) - q16(P[s].pose_x);
          dy = (real'(cy) + 0.3 + 0.4 * real'($urandom_range(0, 99)) / 100.0) / q16(P[s].inv_res) - q16(P[s].pose_y);
          r = $sqrt(dx * dx + dy * dy);
          a = $atan2(dy, dx) - q16(P[s].pose_t);
          if (a < -3.14159) a += 6.28318;
          if (a > 3.14159) a -= 6.28318;
        end else begin
          r = rmin + (rmax - rmin) * (real'($urandom_range(0, 65535)) / 65536.0);
          a = -3.14159 + 6.28318 * (real'($urandom_range(0, 65535)) / 65536.0);
        end
        rng[s][k]   = to_q16(r);
        ang[s][k]   = to_q16(a);
        rng_f[s][k] = q16_to_single(rng[s][k]);
        ang_f[s][k] = q16_to_single(ang[s][k]);
        ok = 1'b1;
        for (int nt = -P[s].win_t; nt < P[s].win_t; nt++)
          if (near_edge(idx_real(s, k, nt, 0)) || near_edge(idx_real(s, k, nt, 1))) ok = 1'b0;
        tries++;
      end while (!ok && tries < 1000);
    end
  endfunction

  function automatic void discretise(input int s, input int nt);
    for (int k = 0; k < P[s].n; k++) begin
      ci[k] = int'($floor(idx_real(s, k, nt, 0)));
      cj[k] = int'($floor(idx_real(s, k, nt, 1)));
    end
  endfunction

  // Algorithm 1, sequential. Returns score and solution.
  task automatic solve_ref(input int s, output int best_s, output int bx, output int by, output int bt,
                       output int n_pruned, output int n_refined);
    int hwx, hwy;
    int cmap [MAXW][MAXW];
    hwx = 2 * P[s].win_x / W;
    hwy = 2 * P[s].win_y / W;
    for (int y = 0; y < P[s].map_h; y++)
      for (int x = 0; x < P[s].map_w; x++) cmap[y][x] = coarse(s, x, y);
    best_s = -1;
    bx = -P[s].win_x; by = -P[s].win_y; bt = -P[s].win_t;
    n_pruned = 0; n_refined = 0;
    for (int nt = -P[s].win_t; nt < P[s].win_t; nt++) begin
      discretise(s, nt);
      for (int hy = 0; hy < hwy; hy++) begin
        for (int hx = 0; hx < hwx; hx++) begin
          int nxc, nyc, sc;
          nxc = -P[s].win_x + hx * W;
          nyc = -P[s].win_y + hy * W;
          sc = 0;
          for (int k = 0; k < P[s].n; k++) begin
            int x, y;
            x = ci[k] + nxc; y = cj[k] + nyc;
            if (x >= 0 && y >= 0 && x < P[s].map_w && y < P[s].map_h) sc += cmap[y][x];
          end
          if (sc <= best_s) begin n_pruned++; continue; end
          n_refined++;
          for (int ny = nyc; ny < nyc + W; ny++)
            for (int nx = nxc; nx < nxc + W; nx++) begin
              int f;
              f = 0;
              for (int k = 0; k < P[s].n; k++) f += m6(s, ci[k] + nx, cj[k] + ny);
              if (f > best_s) begin best_s = f; bx = nx; by = ny; bt = nt; end
            end
        end
      end
    end
  endtask

  // A map with structure: a few walls (high values) on a low background, so
  // that matching has a clear optimum, plus noise. A sparse map has an empty
  // background with 0.5 % random dots, so that coarse scores differ enough
  // for pruning to occur.
  function automatic void make_map(input int s, input bit sparse = 0);
    for (int y = 0; y < P[s].map_h; y++)
      for (int x = 0; x < P[s].map_w; x++)
        if (sparse) mapb[s][y][x] = ($urandom_range(0, 999) < 5) ? byte'($urandom_range(0, 255)) : 8'd0;
        else        mapb[s][y][x] = byte'($urandom_range(0, 60));
    for (int w = 0; w < 6; w++) begin
      int x0, y0, len;
      bit horiz;
      x0 = $urandom_range(0, P[s].map_w - 1);
      y0 = $urandom_range(0, P[s].map_h - 1);
      len = $urandom_range(5, 60);
      horiz = 1'($urandom_range(0, 1));
      for (int t = 0; t < len; t++) begin
        int x, y;
        x = horiz ? x0 + t : x0;
        y = horiz ? y0 : y0 + t;
        if (x < P[s].map_w && y < P[s].map_h) mapb[s][y][x] = byte'($urandom_range(200, 255));
      end
    end
  endfunction

endpackage
