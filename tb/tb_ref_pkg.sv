// tb_ref_pkg: reference models used by the testbenches.
//
// Each function computes a result of the detector in the plainest way, from
// the definitions rather than from the RTL structure: orientation bins from
// $atan2, a dense weight vector instead of the sparse crossbar, real-valued
// division for the normalizer's reciprocal, and exhaustive searches.
package tb_ref_pkg;
  import dpm_pkg::*;

  // orientation bin (0..8) of a gradient, unsigned orientation, 20 deg bins
  function automatic int ref_bin(int gx, int gy);
    real a;
    if (gx == 0 && gy == 0) return 8;  // zero vector: both sides agree below
    a = $atan2(real'(gy), real'(gx)) * 180.0 / 3.14159265358979;
    if (a < 0.0) a += 180.0;
    if (a >= 180.0) a -= 180.0;
    return int'($floor(a / 20.0));
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // dense dot product with a sparse weight word expanded to 13 weights
  function automatic longint ref_sdot(feat_t f, sw_t w);
    int     dense [NDIM];
    int     s;
    longint acc;
    s = 0;
    for (int k = 0; k < NDIM; k++) begin
      dense[k] = 0;
      if (w.flag[k] && s < NNZ) begin
        dense[k] = $signed(w.w[s]);
        s++;
      end
    end
    acc = 0;
    for (int k = 0; k < NDIM; k++) acc += longint'($signed(f[k])) * dense[k];
    return acc;
  endfunction

  // normalization of the 13 raw values
  function automatic feat_t ref_norm(rawvec_t r);
    longint n, rec, v;
    feat_t  f;
    n = 0;
    for (int k = 0; k < NBINS; k++) n += r[k];
    rec = longint'($floor(16777216.0 / real'(n + 1)));
    for (int k = 0; k < NDIM; k++) begin
      v = (longint'(r[k]) * rec) / 16384;
      if (v > 1023) v = 1023;
      f[k] = fe_t'(v);
    end
    return f;
  endfunction

  // basis projection with Q7 coefficients and saturation
  function automatic feat_t ref_proj(feat_t f, logic [NDIM*BW-1:0] b [NDIM]);
    feat_t  o;
    longint d;
    for (int k = 0; k < NDIM; k++) begin
      d = 0;
      for (int j = 0; j < NDIM; j++) d += longint'($signed(f[j])) * longint'($signed(b[k][j*BW +: BW]));
      d = d >>> 7;
      if (d > 1023) d = 1023;
      if (d < -1024) d = -1024;
      o[k] = fe_t'(d);
    end
    return o;
  endfunction

  // nearest center by L1 distance, lowest index on a tie
  function automatic int ref_vq(feat_t f, feat_t cb [NCLUST]);
    int best, bd, d;
    best = 0; bd = 1 << 30;
    for (int c = 0; c < NCLUST; c++) begin
      d = 0;
      for (int k = 0; k < NDIM; k++) d += iabs(int'($signed(f[k])) - int'($signed(cb[c][k])));
      if (d < bd) begin bd = d; best = c; end
    end
    return best;
  endfunction

  function automatic longint ref_cost(int dx, int dy, logic [31:0] c);
    return longint'($signed(c[7:0])) * dx * dx + longint'($signed(c[15:8])) * dx
         + longint'($signed(c[23:16])) * dy * dy + longint'($signed(c[31:24])) * dy;
  endfunction

  function automatic int clamp2(int v);
    return (v > 2) ? 2 : (v < -2) ? -2 : v;
  endfunction

  // ---------------- whole-engine reference ----------------
  localparam int RMAXR = 136, RMAXC = 240;

  typedef struct {
    int          tw, th;
    sw_t         rw [16][16];
    longint      thresh;
    bit          parts;
    int          pw [NPARTS], ph [NPARTS], ax [NPARTS], ay [NPARTS];
    logic [31:0] coef [NPARTS];
    sw_t         pwt [NPARTS][6][6];
  } ecfg_t;

  typedef struct {
    longint score, root;
    int     x, y;
    int     pdx [NPARTS], pdy [NPARTS];
  } rdet_t;

  // feature at a cell, zero outside the level
  function automatic feat_t fget(ref feat_t fa [RMAXR][RMAXC], input int x, int y, int wc, int hc);
    if (x < 0 || y < 0 || x >= wc || y >= hc) return '0;
    return fa[y][x];
  endfunction

  // feature at a cell, zero outside the root window at (wx,wy)
  function automatic feat_t fwin(ref feat_t fa [RMAXR][RMAXC], input int x, int y, int wx, int wy, int tw, int th);
    if (x < wx || y < wy || x >= wx + tw || y >= wy + th) return '0;
    return fa[y][x];
  endfunction

  // Root windows in raster order; those above the threshold get the parts
  // search (confined to the root window): 3x3 grid with stride 2, then the 4 axis neighbours of the best
  // grid point (clamped to -2..2); strict > keeps the earlier point.
  function automatic void ref_detect(ref feat_t fr [RMAXR][RMAXC], ref feat_t fp [RMAXR][RMAXC],
                                     input int wc, int hc, ref ecfg_t c, ref rdet_t q [$]);
    for (int wy = 0; wy + c.th <= hc; wy++)
      for (int wx = 0; wx + c.tw <= wc; wx++) begin
        longint r;
        rdet_t  d;
        r = 0;
        for (int j = 0; j < c.th; j++)
          for (int i = 0; i < c.tw; i++) r += ref_sdot(fr[wy+j][wx+i], c.rw[j][i]);
        if (r <= c.thresh) continue;
        d.root = r; d.x = wx; d.y = wy; d.score = r;
        for (int p = 0; p < NPARTS; p++) begin d.pdx[p] = 0; d.pdy[p] = 0; end
        if (c.parts) begin
          for (int p = 0; p < NPARTS; p++) begin
            longint b;
            int bx, by, cx, cy;
            int px [13], py [13];
            for (int s = 0; s < 9; s++) begin px[s] = (s % 3) * 2 - 2; py[s] = (s / 3) * 2 - 2; end
            for (int s = 0; s < 13; s++) begin
              longint ps, v;
              if (s == 9) begin cx = bx; cy = by; end
              if (s >= 9) begin
                case (s)
                  9:  begin px[s] = clamp2(cx + 1); py[s] = cy; end
                  10: begin px[s] = clamp2(cx - 1); py[s] = cy; end
                  11: begin px[s] = cx; py[s] = clamp2(cy + 1); end
                  default: begin px[s] = cx; py[s] = clamp2(cy - 1); end
                endcase
              end
              ps = 0;
              for (int j = 0; j < c.ph[p]; j++)
                for (int i = 0; i < c.pw[p]; i++)
                  ps += ref_sdot(fwin(fp, wx + c.ax[p] + px[s] + i, wy + c.ay[p] + py[s] + j, wx, wy, c.tw, c.th),
                                 c.pwt[p][j][i]);
              v = ps - ref_cost(px[s], py[s], c.coef[p]);
              if (s == 0 || v > b) begin b = v; bx = px[s]; by = py[s]; end
            end
            d.score += b; d.pdx[p] = bx; d.pdy[p] = by;
          end
        end
        q.push_back(d);
      end
  endfunction
endpackage
