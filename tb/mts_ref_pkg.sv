// mts_ref_pkg: behavioural reference for the testbenches. It recomputes
// what the accelerator should produce with plain integer arithmetic, written
// independently of the RTL: tile levels, the Gaussian weight with its
// exponential table derived at run time from real arithmetic, and the
// per-pixel front-to-back compositing of a depth-ordered point list.
package mts_ref_pkg;
  import mts_pkg::*;

  typedef struct {
    int level;
    bit blend;
    int w;
  } ref_lvl_t;

  function automatic ref_lvl_t ref_level(int tx, int ty, fov_cfg_t cfg);
    ref_lvl_t r;
    int d2, lo;
    longint prod;
    d2 = (tx - int'(cfg.gaze_tx)) * (tx - int'(cfg.gaze_tx)) +
         (ty - int'(cfg.gaze_ty)) * (ty - int'(cfg.gaze_ty));
    r.level = 0;
    if (d2 >= int'(cfg.rb2[0])) r.level = 1;
    if (d2 >= int'(cfg.rb2[1])) r.level = 2;
    if (d2 >= int'(cfg.rb2[2])) r.level = 3;
    r.blend = 0;
    r.w = 0;
    if (r.level < 3) begin
      lo = int'(cfg.blo2[r.level]);
      if (d2 >= lo) begin
        r.blend = 1;
        prod = longint'(d2 - lo) * longint'(cfg.binv[r.level]);
        r.w = int'(prod / 65536);
        if (r.w > 255) r.w = 255;
      end
    end
    return r;
  endfunction

  function automatic int exp2_entry(int i);
    real x;
    x = 65536.0 * (2.0 ** (-real'(i) / 16.0));
    return int'(x);   // int'() of a real rounds to nearest
  endfunction

  // Gaussian value G in Q0.16 at the centre of pixel (pix_x, pix_y).
  function automatic int ref_gauss(gauss_feat_t f, int pix_x, int pix_y);
    longint dx, dy, q, u, v;
    int k, fr, t0, t1, e;
    dx = longint'(pix_x) * 16 + 8 - longint'(f.mean_x);
    dy = longint'(pix_y) * 16 + 8 - longint'(f.mean_y);
    q = longint'(f.conic_a) * dx * dx + 2 * longint'(f.conic_b) * dx * dy +
        longint'(f.conic_c) * dy * dy;
    if (q < 0) q = 0;
    u = q / (longint'(1) << 21);
    if (u >= 4096) return 0;
    v = (u * 5909) / 4096;
    k = int'(v / 256);
    fr = int'(v % 256);
    if (k >= 17) return 0;
    t0 = exp2_entry(fr / 16);
    t1 = exp2_entry(fr / 16 + 1);
    e = t0 - ((t0 - t1) * (fr % 16)) / 16;
    return e >> k;
  endfunction

  typedef struct {
    int t;
    int c[3];
    bit done;
  } ref_px_t;

  function automatic void ref_px_init(output ref_px_t s);
    s.t = 65536; s.c[0] = 0; s.c[1] = 0; s.c[2] = 0; s.done = 0;
  endfunction

  // Apply one point at quality level lv to a pixel.
  function automatic void ref_px_step(ref ref_px_t s, input gauss_feat_t f, input int lv,
                                      input int pix_x, input int pix_y);
    int g, alpha, tt, w;
    if (s.done) return;
    if (lv > int'(f.qbound)) return;
    g = ref_gauss(f, pix_x, pix_y);
    alpha = (int'(f.opacity[lv]) * g) / 65536;
    if (alpha > 252) alpha = 252;
    if (alpha < 1) return;
    tt = (s.t * (256 - alpha)) / 256;
    if (tt < 7) begin
      s.done = 1;
      return;
    end
    w = s.t - tt;
    for (int ch = 0; ch < 3; ch++) s.c[ch] += w * int'(f.rgb[lv][ch*8 +: 8]);
    s.t = tt;
  endfunction

  function automatic int ref_px_rgb(ref_px_t s);
    return ((s.c[2] >> 16) << 16) | ((s.c[1] >> 16) << 8) | (s.c[0] >> 16);
  endfunction

  function automatic int ref_blend(int a, int b, int w, bit bl);
    int r;
    if (!bl) return a;
    r = 0;
    for (int ch = 0; ch < 3; ch++)
      r |= ((((a >> (8*ch)) & 255) * (256 - w) + ((b >> (8*ch)) & 255) * w) / 256) << (8*ch);
    return r;
  endfunction

  // A random but well-formed Gaussian near pixel (cx, cy), radius ~ r pixels.
  function automatic gauss_feat_t rand_feat(int cx, int cy, int r);
    gauss_feat_t f;
    int s2;
    f.mean_x = 16'(cx * 16 + int'($urandom_range(0, 15)));
    f.mean_y = 16'(cy * 16 + int'($urandom_range(0, 15)));
    // conic ~ 1/sigma^2 with sigma ~ r/3, in Q4.20 per (Q12.4 unit)^2 = pix_x^2/256
    s2 = (r * r) / 9 + 1;
    f.conic_a = 24'((1 << 20) / (s2 * 256) + int'($urandom_range(0, 255)));
    f.conic_c = 24'((1 << 20) / (s2 * 256) + int'($urandom_range(0, 255)));
    f.conic_b = 24'(int'($urandom_range(0, 64)) - 32);
    f.qbound  = 2'($urandom_range(0, 3));
    for (int l = 0; l < 4; l++) begin
      f.opacity[l] = 8'($urandom_range(40, 255));
      f.rgb[l]     = 24'($urandom);
    end
    return f;
  endfunction
endpackage
