// c3po_ref_pkg: bit-exact reference model of the C3PO datapath for the
// testbenches, written with plain integer arithmetic (floor division and
// explicit saturation) and independent of the RTL's code.
//
// Formats (integers scaled by 2^fraction bits): Hbar 8, x 8, tau*x 13,
// phase-1 accumulator 15, w 15, phase-2 accumulator 11, projection 7.
// The model follows the hardware's order of accumulation, so it stays exact
// even where a sum saturates.
package c3po_ref_pkg;

  typedef struct {
    longint re;
    longint im;
  } cpx_t;

  function automatic longint fdiv(input longint a, input int unsigned sh);
    longint d;
    d = longint'(1) << sh;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic longint satn(input longint v, input int unsigned n);
    longint hi, lo;
    hi = (longint'(1) << (n - 1)) - 1;
    lo = -(longint'(1) << (n - 1));
    return (v > hi) ? hi : ((v < lo) ? lo : v);
  endfunction

  // complex product, optionally with conj(h)
  function automatic cpx_t cmul(input cpx_t h, input cpx_t b, input bit cj);
    cpx_t r;
    if (cj) begin
      r.re = h.re * b.re + h.im * b.im;
      r.im = h.re * b.im - h.im * b.re;
    end else begin
      r.re = h.re * b.re - h.im * b.im;
      r.im = h.re * b.im + h.im * b.re;
    end
    return r;
  endfunction

  // MAC product in accumulator format: phase 1 -> 15 fraction bits,
  // phase 2 (conjugated) -> 11 fraction bits, 18-bit saturation
  function automatic cpx_t mac_prod(input cpx_t h, input cpx_t b, input bit ph2);
    cpx_t p, r;
    p = cmul(h, b, ph2);
    r.re = satn(fdiv(p.re, ph2 ? 12 : 6), 18);
    r.im = satn(fdiv(p.im, ph2 ? 12 : 6), 18);
    return r;
  endfunction

  function automatic cpx_t add_sat(input cpx_t a, input cpx_t b, input bit neg, input int unsigned n);
    cpx_t r;
    r.re = satn(neg ? a.re - b.re : a.re + b.re, n);
    r.im = satn(neg ? a.im - b.im : a.im + b.im, n);
    return r;
  endfunction

  // tau * x: x 8 fraction bits, tau 13 fraction bits -> 13 fraction bits, 14 bit
  function automatic cpx_t tau_x(input cpx_t x, input longint tau);
    cpx_t r;
    r.re = satn(fdiv(x.re * tau, 8), 14);
    r.im = satn(fdiv(x.im * tau, 8), 14);
    return r;
  endfunction

  // shift-add constants of the projection and the quantizer
  function automatic longint mc(input longint v);  return fdiv(v, 1) - fdiv(v, 4); endfunction
  function automatic longint mk(input longint v);  return 2 * v + fdiv(v, 1);      endfunction
  function automatic longint mkap(input longint v); return v - fdiv(v, 3);         endfunction

  // projection: z with 11 fraction bits, scale with 8 -> x with 8 fraction
  // bits; region 0..5 = A, B, C, D, E, F
  function automatic cpx_t proj(input cpx_t z, input longint scale, output int region);
    longint zr, zi, r, i, pr, pi, s;
    cpx_t o;
    zr = satn(fdiv(z.re * scale, 12), 15);
    zi = satn(fdiv(z.im * scale, 12), 15);
    r = (zr < 0) ? -zr : zr;
    i = (zi < 0) ? -zi : zi;
    if (!(i > 128 - mc(r)) && !(r > 128 - mc(i))) begin
      region = 0; pr = r; pi = i;
    end else if (i >= mk(r) + 128) begin
      region = 1; pr = 0; pi = 128;
    end else if (r >= mk(i) + 128) begin
      region = 3; pr = 128; pi = 0;
    end else if (i > mk(r) - 128) begin
      region = 4;
      s = mkap(r + mc(128 - i));
      s = (s < 0) ? 0 : ((s > 91) ? 91 : s);
      pr = s; pi = 128 - mc(s);
    end else if (r > mk(i) - 128) begin
      region = 5;
      s = mkap(i + mc(128 - r));
      s = (s < 0) ? 0 : ((s > 91) ? 91 : s);
      pi = s; pr = 128 - mc(s);
    end else begin
      region = 2; pr = 91; pi = 91;
    end
    o.re = 2 * ((zr < 0) ? -pr : pr);
    o.im = 2 * ((zi < 0) ? -pi : pi);
    return o;
  endfunction

  // 3-bit phase index of x (8 fraction bits)
  function automatic int quant(input cpx_t x);
    longint r, i;
    r = (x.re < 0) ? -x.re : x.re;
    i = (x.im < 0) ? -x.im : x.im;
    if (i <= mc(r)) return (x.re < 0) ? 4 : 0;
    if (r <= mc(i)) return (x.im < 0) ? 6 : 2;
    if (x.re >= 0 && x.im >= 0) return 1;
    if (x.re < 0 && x.im >= 0) return 3;
    if (x.re < 0) return 5;
    return 7;
  endfunction

  // One C3PO iteration of the whole array, bit-exact.
  //   hb[u*B + col]  Hbar entry (u = 0..U), x[B] in/out, region counts out.
  function automatic void iterate(input int U, input int B, input cpx_t hb[],
                                  ref cpx_t x[], input longint tau, input longint scale,
                                  ref int regcnt[6]);
    int NA, L, pidx1, col, q, reg_id;
    cpx_t tx[], part[], lvl[], w[], acc, z[];
    NA = B / U;
    L = $clog2(NA);
    tx = new[B];
    w = new[U + 1];
    z = new[B];
    foreach (tx[j]) tx[j] = tau_x(x[j], tau);
    // phase 1 and adder tree
    for (int u = 0; u <= U; u++) begin
      part = new[NA];
      for (int k = 0; k < NA; k++) begin
        pidx1 = (u < U) ? u : U - 1;
        for (int c = 0; c < U; c++) begin
          col = (pidx1 + c) % U;
          if (c == 0) part[k] = mac_prod(hb[u*B + k*U + col], tx[k*U + col], 0);
          else part[k] = add_sat(part[k], mac_prod(hb[u*B + k*U + col], tx[k*U + col], 0), 0, 18);
        end
      end
      for (int l = 0; l < L; l++) begin
        lvl = new[part.size() / 2];
        foreach (lvl[m]) lvl[m] = add_sat(part[2*m], part[2*m+1], 0, 21);
        part = lvl;
      end
      w[u] = part[0];
    end
    // phase 2 and projection
    for (int k = 0; k < NA; k++) begin
      for (int j = 0; j < U; j++) begin
        acc.re = x[k*U + j].re * 8;
        acc.im = x[k*U + j].im * 8;
        for (int c = 0; c <= U; c++) begin
          q = (j - c + U + 1) % (U + 1);
          acc = add_sat(acc, mac_prod(hb[q*B + k*U + j], w[q], 1), q < U, 18);
        end
        z[k*U + j] = acc;
      end
    end
    foreach (x[j]) begin
      x[j] = proj(z[j], scale, reg_id);
      regcnt[reg_id]++;
    end
  endfunction

endpackage
