// smc_ref_pkg: reference model of the scan matcher for the testbenches.
//
// It computes, sample by sample with plain loops, what the hardware should
// produce: CORDIC sine/cosine, hit and missed cells of a measurement, the
// 3x3 window test on a plain (not tripled) map, the score of a pose and the
// full hill-climbing refinement. It uses the same fixed-point rules as the
// hardware (Q16.16, floor on every product) so results must match bit for
// bit; independent real-arithmetic checks live in the testbenches.
//
// It also builds test scenes: a room of walls with a few pillars, and a
// simulated LiDAR scan by ray marching from a true pose.
//
// The algorithm (transform, hit/missed window test, table score, hill
// climbing with step halving and a fixed iteration count) follows the
// published method; the scenes and the exact fixed-point rounding mirror
// this design's own choices.
package smc_ref_pkg;
  import smc_pkg::*;

  localparam int MAXM = 256;      // largest local map side kept here
  localparam int MAXP = 4;        // largest number of particles kept here

  bit    refmap [MAXP][MAXM][MAXM];   // [particle][y][x], 1 = occupied
  scan_t refscan [512];

  // ---------------------------------------------------------------- CORDIC
  function automatic void cordic(input fix_t a, output fix_t c, output fix_t s);
    logic signed [31:0] x, y, z, xn, yn;
    fix_t w;
    bit   ng;
    w = a;
    if (w >= FIX_PI) w -= FIX_TWO_PI; else if (w < -FIX_PI) w += FIX_TWO_PI;
    ng = 0;
    if (w > FIX_HALF_PI) begin w -= FIX_PI; ng = 1; end
    else if (w < -FIX_HALF_PI) begin w += FIX_PI; ng = 1; end
    x = CORDIC_INV_K; y = 0; z = w <<< 14;
    for (int i = 0; i < CORDIC_ITER; i++) begin
      if (z >= 0) begin xn = x - (y >>> i); yn = y + (x >>> i); z -= cordic_atan(i); end
      else        begin xn = x + (y >>> i); yn = y - (x >>> i); z += cordic_atan(i); end
      x = xn; y = yn;
    end
    c = ng ? -(x >>> 14) : (x >>> 14);
    s = ng ? -(y >>> 14) : (y >>> 14);
  endfunction

  function automatic int floor_cell(input fix_t p, input fix_t inv_res);
    longint prod;
    prod = longint'(p) * longint'(inv_res);
    return int'(prod >>> 32);
  endfunction

  // Hit / missed cells of one measurement, relative to the local map
  function automatic void cells(input pose_t p, input scan_t z, input params_t pr,
                                input int cx0, input int cy0,
                                output int hx, output int hy, output int mx, output int my);
    fix_t c, s, bx, by, rf;
    cordic(p.th + z.th, c, s);
    bx = p.x - pr.origin_x;
    by = p.y - pr.origin_y;
    rf = z.r - pr.free_delta;
    hx = floor_cell(bx + fix_mul(z.r, c), pr.inv_res) - cx0;
    hy = floor_cell(by + fix_mul(z.r, s), pr.inv_res) - cy0;
    mx = floor_cell(bx + fix_mul(rf, c), pr.inv_res) - cx0;
    my = floor_cell(by + fix_mul(rf, s), pr.inv_res) - cy0;
  endfunction

  function automatic bit cell_at(input int k, input int msz, input int x, input int y);
    if (x < 0 || y < 0 || x >= msz || y >= msz) return 0;
    return refmap[k][y][x];
  endfunction

  // Window of the plain map around (cx, cy); zero if the centre is outside
  function automatic win_t window(input int k, input int msz, input int cx, input int cy);
    win_t w;
    w = '0;
    if (cx < 0 || cy < 0 || cx >= msz || cy >= msz) return w;
    for (int ky = -1; ky <= 1; ky++)
      for (int kx = -1; kx <= 1; kx++)
        w[(ky + 1) * 3 + (kx + 1)] = cell_at(k, msz, cx + kx, cy + ky);
    return w;
  endfunction

  // Score of one measurement given the two windows (minimum distance first)
  function automatic fix_t beam_score(input win_t h, input win_t m, input bit inmap,
                                      input lut_t lut, output bit found);
    int best_d2;
    fix_t v;
    found = 0; v = 0; best_d2 = 99;
    if (!inmap) return 0;
    for (int k = 0; k < 9; k++) begin
      int kx, ky, d2;
      kx = k % 3 - 1; ky = k / 3 - 1; d2 = kx * kx + ky * ky;
      if (h[k] && !m[k] && d2 < best_d2) begin
        best_d2 = d2; v = lut[k]; found = 1;
      end
    end
    return v;
  endfunction

  function automatic fix_t score(input int k, input int msz, input pose_t p,
                                 input params_t pr, input lut_t lut,
                                 input int cx0, input int cy0);
    fix_t acc;
    acc = 0;
    for (int i = 0; i < int'(pr.num_scans); i++) begin
      int hx, hy, mx, my;
      bit inmap, f;
      cells(p, refscan[i], pr, cx0, cy0, hx, hy, mx, my);
      inmap = (hx >= 0 && hy >= 0 && hx < msz && hy < msz);
      acc += beam_score(window(k, msz, hx, hy), window(k, msz, mx, my), inmap, lut, f);
    end
    return acc;
  endfunction

  function automatic void corner(input pose_t p, input params_t pr, input int w,
                                 output int cx0, output int cy0);
    cx0 = floor_cell(p.x - pr.origin_x, pr.inv_res) - w;
    cy0 = floor_cell(p.y - pr.origin_y, pr.inv_res) - w;
  endfunction

  // Full hill climbing; returns refined pose, score and how often it moved/halved
  function automatic void greedy(input int k, input int w, input pose_t init,
                                 input params_t pr, input lut_t lut,
                                 output pose_t po, output fix_t so,
                                 output int n_imp, output int n_half);
    int cx0, cy0, msz;
    fix_t ls, as, cur, best;
    pose_t cp, bp, cand;
    msz = 2 * w;
    corner(init, pr, w, cx0, cy0);
    cp = init; ls = pr.lin_step; as = pr.ang_step;
    cur = score(k, msz, cp, pr, lut, cx0, cy0);
    n_imp = 0; n_half = 0;
    for (int it = 0; it < int'(pr.num_iters); it++) begin
      best = cur; bp = cp;
      for (int d = 0; d < 6; d++) begin
        fix_t s;
        cand = cp;
        case (d)
          0: cand.x  = cp.x + ls;
          1: cand.x  = cp.x - ls;
          2: cand.y  = cp.y - ls;
          3: cand.y  = cp.y + ls;
          4: cand.th = cp.th + as;
          5: cand.th = cp.th - as;
        endcase
        s = score(k, msz, cand, pr, lut, cx0, cy0);
        if (s > best) begin best = s; bp = cand; end
      end
      if (best > cur) begin cp = bp; cur = best; n_imp++; end
      else begin ls = ls >>> 1; as = as >>> 1; n_half++; end
    end
    po = cp; so = cur;
  endfunction

  // ------------------------------------------------------------ test scenes
  // uniform random integer in [0, n)
  function automatic int urand(input int n);
    int v;
    v = $urandom_range(n - 1, 0);
    return v;
  endfunction

  function automatic fix_t to_fix(input real v);
    return fix_t'($rtoi(v * 65536.0 + (v >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic real to_real(input fix_t v);
    return real'(v) / 65536.0;
  endfunction

  // Room with walls at the given margin (cells) and random pillars
  function automatic void make_room(input int k, input int msz, input int margin,
                                    input int pillars, input int unsigned seed);
    int unsigned sd;
    sd = seed;
    for (int y = 0; y < MAXM; y++) for (int x = 0; x < MAXM; x++) refmap[k][y][x] = 0;
    for (int i = margin; i < msz - margin; i++) begin
      refmap[k][margin][i] = 1; refmap[k][msz - 1 - margin][i] = 1;
      refmap[k][i][margin] = 1; refmap[k][i][msz - 1 - margin] = 1;
    end
    for (int p = 0; p < pillars; p++) begin
      int px, py;
      sd = sd * 1103515245 + 12345; px = margin + 4 + int'((sd >> 8) % unsigned'(msz - 2 * margin - 10));
      sd = sd * 1103515245 + 12345; py = margin + 4 + int'((sd >> 8) % unsigned'(msz - 2 * margin - 10));
      refmap[k][py][px] = 1; refmap[k][py][px + 1] = 1;
      refmap[k][py + 1][px] = 1; refmap[k][py + 1][px + 1] = 1;
    end
  endfunction

  // Ray-marched scan from a true pose (metres relative to the local map
  // corner), n beams over 360 degrees; delta = cell size in metres
  function automatic void make_scan(input int k, input int msz, input real tx, input real ty,
                                    input real tth, input int n, input real delta);
    for (int i = 0; i < n; i++) begin
      real a, r, x, y;
      a = -3.14159 + 6.28318 * real'(i) / real'(n);
      r = 0.0;
      forever begin
        r += delta / 8.0;
        x = tx + r * $cos(tth + a);
        y = ty + r * $sin(tth + a);
        if (cell_at(k, msz, int'($floor(x / delta)), int'($floor(y / delta))) ||
            x < 0 || y < 0 || x >= msz * delta || y >= msz * delta || r > 100.0) break;
      end
      refscan[i].r  = to_fix(r);
      refscan[i].th = to_fix(a);
    end
  endfunction

endpackage
