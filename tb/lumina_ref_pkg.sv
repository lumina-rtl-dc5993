// lumina_ref_pkg: reference arithmetic and scene generation for the testbenches.
//
// The functions here compute, one Gaussian and one pixel at a time in plain
// integer arithmetic, what the pipelined hardware must produce:
//   ref_pe_e      exponent e and significance of a Gaussian for a pixel
//   ref_alpha     opacity * exp(-e) with the same table interpolation as the
//                 hardware's exponent unit (checked against $exp separately)
//   ref_render    full 3DGS colour integration of one pixel over a sorted list,
//                 also returning the first K_REC integrated IDs (cache key)
//   make_gaussian a random Gaussian near a tile, with its conic and threshold
//                 derived in floating point
package lumina_ref_pkg;
  import lumina_pkg::*;

  typedef struct {
    logic [23:0] rgb;
    int          nrec;
    logic [31:0] rec [K_REC];
    int          stop_idx;   // list position after the K_REC-th record, or -1
    bit          term;       // transmittance fell below 1e-4 (early termination)
  } ref_pix_t;

  function automatic void ref_pe_e(input feature_t f, input int px, input int py,
                                   output bit sig, output int e);
    longint dx, dy, q, eq;
    dx = longint'(px) - longint'(f.x);
    dy = longint'(py) - longint'(f.y);
    q  = 2 * (dx * dx * longint'(f.conx) + dy * dy * longint'(f.conz)) + dx * dy * longint'(f.cony);
    eq = q >>> 10;
    if (eq > 65535) eq = 65535;
    e   = int'(eq);
    sig = (q >= 0) && (e < int'(f.thr));
  endfunction

  function automatic int lut(input int i);
    int t [17] = '{65536, 62757, 60097, 57549, 55109, 52773, 50535, 48393, 46341,
                   44376, 42495, 40693, 38968, 37316, 35734, 34219, 32768};
    return t[i];
  endfunction

  function automatic int ref_alpha(input int e, input int op);
    longint y, yi, li, fr, m, ex;
    y  = longint'(e) * 47274;
    yi = y >> 25;
    li = (y >> 21) & 15;
    fr = (y >> 5) & 16'hffff;
    m  = lut(int'(li)) - (((lut(int'(li)) - lut(int'(li) + 1)) * fr) >> 16);
    ex = (yi > 16) ? 0 : (m >> yi);
    return int'((ex * op) >> 8) & 16'hffff;
  endfunction

  // Colour integration of one pixel; stop_at_k: report where the K_REC-th
  // record fell (the dense pass of a cached pixel ends there).
  function automatic ref_pix_t ref_render(input feature_t fl [], input int len,
                                          input int px, input int py, input int tau);
    ref_pix_t r;
    longint t, cr, cg, cb, tn, w;
    bit sig;
    int e, a;
    t = 65536; cr = 0; cg = 0; cb = 0;
    r.nrec = 0; r.stop_idx = -1; r.term = 0;
    for (int k = 0; k < K_REC; k++) r.rec[k] = '0;
    for (int i = 0; i < len; i++) begin
      ref_pe_e(fl[i], px, py, sig, e);
      if (!sig) continue;
      a = ref_alpha(e, int'(fl[i].op));
      if (a <= tau) continue;
      tn = (t * (65536 - a)) >> 16;
      if (tn <= 6) begin r.term = 1; break; end
      w  = (longint'(a) * t) >> 16;
      cr += w * fl[i].r; cg += w * fl[i].g; cb += w * fl[i].b;
      t = tn;
      if (r.nrec < K_REC) begin
        r.rec[r.nrec] = fl[i].gid;
        r.nrec++;
        if (r.nrec == K_REC) r.stop_idx = i + 1;
      end
    end
    cr = (cr + 32768) >> 16; cg = (cg + 32768) >> 16; cb = (cb + 32768) >> 16;
    if (cr > 255) cr = 255;
    if (cg > 255) cg = 255;
    if (cb > 255) cb = 255;
    r.rgb = {8'(cr), 8'(cg), 8'(cb)};
    return r;
  endfunction

  // Random Gaussian centred in [lo, hi) pixels, radius 1..smax pixels.
  function automatic feature_t make_gaussian(input int lo, input int hi, input int smax);
    feature_t f;
    real sx, sy, rho, a, b, c, det, op;
    sx  = 0.8 + ($urandom % 1000) / 1000.0 * (smax - 0.8);
    sy  = 0.8 + ($urandom % 1000) / 1000.0 * (smax - 0.8);
    rho = (($urandom % 1000) / 1000.0 - 0.5) * 1.2;
    // inverse of [[sx^2, rho sx sy], [rho sx sy, sy^2]]
    det = sx * sx * sy * sy * (1.0 - rho * rho);
    a   = sy * sy / det;
    c   = sx * sx / det;
    b   = -rho * sx * sy / det;
    op  = 0.05 + ($urandom % 1000) / 1000.0 * 0.94;
    f.gid  = $urandom;
    f.x    = 16'(lo * 16 + int'($urandom % ((hi - lo) * 16)));
    f.y    = 16'(lo * 16 + int'($urandom % ((hi - lo) * 16)));
    f.conx = 18'(longint'(a / 4.0 * 4096.0 + 0.5));
    f.cony = 18'(longint'(b * 4096.0 + ((b < 0) ? -0.5 : 0.5)));
    f.conz = 18'(longint'(c / 4.0 * 4096.0 + 0.5));
    f.op   = 8'(int'(op * 256.0));
    if (f.op * 255.0 / 256.0 <= 1.0) f.thr = '0;
    else f.thr = 16'(int'($ln(f.op * 255.0 / 256.0) * 1024.0));
    f.r = 8'($urandom); f.g = 8'($urandom); f.b = 8'($urandom);
    return f;
  endfunction

endpackage
