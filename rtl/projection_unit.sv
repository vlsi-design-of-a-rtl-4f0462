// projection_unit: the proximal operator of C3PO for one vector entry,
// x = proj( z / (1 - tau*delta) ), projecting onto the regular octagon whose
// corners are the eight 3-bit constant-modulus points exp(j*2*pi*p/8).
//
// How it works. The entry is folded into the first quadrant (r = |Re|,
// i = |Im|, signs kept). There the plane splits into six regions bounded by
//   l1: i = 1 - c*r      l2: r = 1 - c*i        (octagon edges, c = sqrt2-1)
//   l3: i = k*r + 1      l4: i = k*r - 1        (k = 1/c, normals of l1)
//   l6: r = k*i + 1      l5: r = k*i - 1        (normals of l2)
//   A inside both edges          -> unchanged
//   B above l3                   -> (0, 1)
//   D right of l6                -> (1, 0)
//   E outside l1, between l3/l4  -> closest point on l1
//   F outside l2, between l5/l6  -> closest point on l2
//   C otherwise (beyond corner)  -> (1/sqrt2, 1/sqrt2)
// then the signs are restored. The region logic and line equations follow
// the paper; so does the use of short constants (no multipliers) and of
// 7 fraction bits. The constants chosen here are c = 7/16, k = 5/2, the
// edge-projection factor 1/(1+c^2) = 7/8 and 1/sqrt2 = 91/128, each built
// from shifts and adds. The projection onto l1 is
//   s = (r + c*(1 - i)) / (1 + c^2),  result (s, 1 - c*s), s clamped to
//   [0, 1/sqrt2]
// and symmetrically for l2. The internal datapath uses 20-bit values so that
// large inputs cannot overflow (the paper quotes 14-15 bits).
//
// The scaling by 1/(1 - tau*delta) is a multiplication by the run-time
// constant "scale" (unsigned, 8 fraction bits). The paper states the
// scaling but not where it is done; it is folded into this unit here.
//
// Timing: z is registered after scaling (stage 1), the folded entry and its
// region after classification (stage 2); x is a combinational function of
// stage 2, to be registered by the PE. Latency z -> x register: 3 clocks.
// Input z has 18 bits with 11 fraction bits, output x 14 bits with 8.
// Since the projection works with 7 fraction bits, the LSB of x.re and
// x.im is always zero.
module projection_unit
  import c3po_pkg::*;
(
  input  logic           clk,
  input  acc_t           z,
  input  logic [SCW-1:0] scale,
  output x_t             x,
  output logic [2:0]     region  // region of the entry in stage 2 (for test/coverage)
);

  typedef enum logic [2:0] {REG_A, REG_B, REG_C, REG_D, REG_E, REG_F} region_e;

  localparam int unsigned IW = 20;
  typedef logic signed [IW-1:0] iv_t;
  localparam iv_t ONE = iv_t'(1 << PF);   // 1.0 with 7 fraction bits
  localparam iv_t D45 = iv_t'(91);        // 1/sqrt2 with 7 fraction bits

  function automatic iv_t mul_c(input iv_t v);      // * 7/16
    return (v >>> 1) - (v >>> 4);
  endfunction
  function automatic iv_t mul_k(input iv_t v);      // * 5/2
    return (v <<< 1) + (v >>> 1);
  endfunction
  function automatic iv_t mul_kappa(input iv_t v);  // * 7/8
    return v - (v >>> 3);
  endfunction
  function automatic iv_t clamp_s(input iv_t v);
    if (v < 0) return '0;
    if (v > D45) return D45;
    return v;
  endfunction

  // ---------------- stage 1: scaling ----------------------------------
  localparam int unsigned SSH = AF2 + SCF - PF;  // 12
  p_t zs;
  always_ff @(posedge clk) begin
    zs.re <= PW'(sat(64'((z.re * $signed({1'b0, scale})) >>> SSH), PW));
    zs.im <= PW'(sat(64'((z.im * $signed({1'b0, scale})) >>> SSH), PW));
  end

  // ---------------- stage 2: fold and classify ------------------------
  iv_t r_c, i_c;
  region_e reg_c;
  always_comb begin
    logic out1, out2, in_b, in_d, side_e, side_f;
    r_c = zs.re[PW-1] ? -iv_t'(zs.re) : iv_t'(zs.re);
    i_c = zs.im[PW-1] ? -iv_t'(zs.im) : iv_t'(zs.im);
    out1   = i_c > ONE - mul_c(r_c);
    out2   = r_c > ONE - mul_c(i_c);
    in_b   = i_c >= mul_k(r_c) + ONE;
    in_d   = r_c >= mul_k(i_c) + ONE;
    side_e = i_c > mul_k(r_c) - ONE;
    side_f = r_c > mul_k(i_c) - ONE;
    if (!out1 && !out2) reg_c = REG_A;
    else if (in_b)      reg_c = REG_B;
    else if (in_d)      reg_c = REG_D;
    else if (side_e)    reg_c = REG_E;
    else if (side_f)    reg_c = REG_F;
    else                reg_c = REG_C;
  end

  iv_t r_q, i_q;
  logic sr_q, si_q;
  region_e reg_q;
  always_ff @(posedge clk) begin
    r_q   <= r_c;
    i_q   <= i_c;
    sr_q  <= zs.re[PW-1];
    si_q  <= zs.im[PW-1];
    reg_q <= reg_c;
  end

  // ---------------- stage 3: project and unfold (combinational) -------
  always_comb begin
    iv_t pr, pi, s;
    s = '0;
    unique case (reg_q)
      REG_A: begin pr = r_q; pi = i_q; end
      REG_B: begin pr = '0;  pi = ONE; end
      REG_D: begin pr = ONE; pi = '0;  end
      REG_C: begin pr = D45; pi = D45; end
      REG_E: begin
        s  = clamp_s(mul_kappa(r_q + mul_c(ONE - i_q)));
        pr = s;
        pi = ONE - mul_c(s);
      end
      default: begin  // REG_F
        s  = clamp_s(mul_kappa(i_q + mul_c(ONE - r_q)));
        pi = s;
        pr = ONE - mul_c(s);
      end
    endcase
    // 7 -> 8 fraction bits, restore signs
    x.re = XW'((sr_q ? -pr : pr) <<< (XF - PF));
    x.im = XW'((si_q ? -pi : pi) <<< (XF - PF));
  end

  assign region = reg_q;

endmodule
