// podvs_ref_pkg -- plain behavioural reference of the channel pipeline, used
// by the testbenches.  Each function computes one stage over whole maps with
// simple loops, written from the stage equations rather than from the RTL's
// schedule: nearest-neighbour pyramid, zero-padded 5x5 weighted sums, square
// root by bit refinement, von Mises sum over coarser levels, border
// ownership, masked grouping.  It also holds the behavioural model of the
// host's mask computation (left mask where B_L > B_R, right where B_R > B_L).
package podvs_ref_pkg;
  import podvs_pkg::*;

  typedef int map_t [];

  function automatic int sat(int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  function automatic map_t down(map_t src, int sw, int sh, int dw, int dh);
    map_t d = new[dw * dh];
    int rx = (sw * 256) / dw, ry = (sh * 256) / dh;
    for (int y = 0; y < dh; y++)
      for (int x = 0; x < dw; x++)
        d[y * dw + x] = src[((y * ry) >> 8) * sw + ((x * rx) >> 8)];
    return d;
  endfunction

  // weighted sum at (x, y) with zero padding, kernel given as 25 ints
  function automatic int wsum(map_t m, int w, int h, int x, int y, int k [25]);
    int s = 0;
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 5; c++) begin
        int yy = y + r - 2, xx = x + c - 2;
        if (yy >= 0 && yy < h && xx >= 0 && xx < w) s += k[r * 5 + c] * m[yy * w + xx];
      end
    return s;
  endfunction

  function automatic int filt(int i, int t);
    return int'(FILT_K[i][t]);
  endfunction
  function automatic int vmk(int i, int t);
    return int'(VM_K[i][t]);
  endfunction

  function automatic longint unsigned usqrt(longint unsigned v);
    longint unsigned r = 0;
    for (int b = 20; b >= 0; b--) begin
      longint unsigned t = r | (64'd1 << b);
      if (t * t <= v) r = t;
    end
    return r;
  endfunction

  // P3: returns 6 maps, C_0..C_135, ON, OFF
  function automatic void edge_cs(map_t p, int w, int h, ref map_t e [6]);
    int ke [25], ko [25], kc [25];
    for (int i = 0; i < 6; i++) e[i] = new[w * h];
    for (int t = 0; t < 25; t++) kc[t] = filt(8, t);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int cs;
        for (int o = 0; o < 4; o++) begin
          longint ev, od;
          for (int t = 0; t < 25; t++) begin ke[t] = filt(o, t); ko[t] = filt(o + 4, t); end
          ev = longint'(wsum(p, w, h, x, y, ke));
          od = longint'(wsum(p, w, h, x, y, ko));
          e[o][y * w + x] = sat(int'(usqrt(64'(ev * ev + od * od)) >> 6));
        end
        cs = wsum(p, w, h, x, y, kc);
        e[4][y * w + x] = sat(cs >>> 6);
        e[5][y * w + x] = sat((-cs) >>> 6);
      end
  endfunction

  // P4: 16 maps, index pol*8 + side*4 + ori
  function automatic void vmf(map_t on, map_t off, int w, int h, ref map_t v [16]);
    int k [25];
    for (int m = 0; m < 16; m++) begin
      v[m] = new[w * h];
      for (int t = 0; t < 25; t++) k[t] = vmk(m % 8, t);
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++)
          v[m][y * w + x] = sat(wsum((m < 8) ? on : off, w, h, x, y, k) >>> 6);
    end
  endfunction

  // P5 for one map over three levels
  function automatic void vmsum(ref map_t v [3], input int lw [3], input int lh [3]);
    map_t o [3];
    for (int j = 0; j < 3; j++) begin
      o[j] = new[lw[j] * lh[j]];
      for (int y = 0; y < lh[j]; y++)
        for (int x = 0; x < lw[j]; x++) begin
          int s = 0;
          for (int k = j; k < 3; k++) begin
            int xk = (x * ((lw[k] * 256) / lw[j])) >> 8;
            int yk = (y * ((lh[k] * 256) / lh[j])) >> 8;
            s += v[k][yk * lw[k] + xk] >> k;
          end
          o[j][y * lw[j] + x] = sat(s);
        end
    end
    for (int j = 0; j < 3; j++) v[j] = o[j];
  endfunction

  // P6: 8 maps, side*4 + ori
  function automatic void bo(map_t e [6], map_t s [16], int n, ref map_t b [8]);
    for (int l = 0; l < 8; l++) begin
      int side = l / 4, ori = l % 4;
      b[l] = new[n];
      for (int a = 0; a < n; a++) begin
        int tot = 0;
        for (int p = 0; p < 2; p++) begin
          int d = s[p * 8 + side * 4 + ori][a] - s[p * 8 + (1 - side) * 4 + ori][a];
          if (d < 0) d = 0;
          tot += (e[ori][a] * d) >> 8;
        end
        b[l][a] = sat(tot);
      end
    end
  endfunction

  // host model: binary masks from the BO maps
  function automatic void masks(map_t b [8], int n, ref map_t mk [8]);
    for (int t = 0; t < 4; t++) begin
      mk[t] = new[n]; mk[t + 4] = new[n];
      for (int a = 0; a < n; a++) begin
        mk[t][a]     = (b[t][a] > b[t + 4][a]) ? 1 : 0;
        mk[t + 4][a] = (b[t + 4][a] > b[t][a]) ? 1 : 0;
      end
    end
  endfunction

  // P7: 4 maps
  function automatic void grp(map_t b [8], map_t mk [8], int w, int h, int wp,
                              ref map_t g [4]);
    map_t in_m [8];
    int k [25];
    for (int i = 0; i < 8; i++) begin
      int oth = (i < 4) ? i + 4 : i - 4;
      in_m[i] = new[w * h];
      for (int a = 0; a < w * h; a++)
        in_m[i][a] = (mk[i][a] != 0) ? (b[i][a] - wp * b[oth][a]) : 0;
    end
    for (int t = 0; t < 4; t++) begin
      g[t] = new[w * h];
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          int s;
          for (int q = 0; q < 25; q++) k[q] = vmk(t, q);
          s = wsum(in_m[t], w, h, x, y, k);
          for (int q = 0; q < 25; q++) k[q] = vmk(t + 4, q);
          s += wsum(in_m[t + 4], w, h, x, y, k);
          g[t][y * w + x] = sat(s >>> 6);
        end
    end
  endfunction

endpackage
