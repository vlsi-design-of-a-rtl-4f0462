// cm_quantizer: maps an entry of the final C3PO iterate to the nearest point
// of the 3-bit constant-modulus alphabet exp(j*2*pi*p/8) and outputs p.
//
// The paper quantizes x^(tmax+1) to the alphabet after the last iteration
// but does not say how. Here the entry is folded into the first quadrant
// (r = |Re|, i = |Im|); the decision boundaries are the rays at 22.5 and 67.5
// degrees, i.e. i = c*r and r = c*i with c = tan(22.5deg) = sqrt2 - 1, for
// which the same shift-add constant c = 7/16 as in the projection unit is
// used. The quadrant then selects p:
//   near real axis -> p = 0 (Re >= 0) or 4 (Re < 0)
//   near imag axis -> p = 2 (Im >= 0) or 6 (Im < 0)
//   diagonal       -> p = 1, 3, 5, 7 for quadrants I, II, III, IV
// An exact zero input yields p = 0. Purely combinational.
module cm_quantizer
  import c3po_pkg::*;
(
  input  x_t         x,
  output logic [2:0] p
);

  typedef logic signed [XW+1:0] qv_t;

  function automatic qv_t mul_c(input qv_t v);  // * 7/16
    return (v >>> 1) - (v >>> 4);
  endfunction

  always_comb begin
    qv_t r, i;
    logic neg_re, neg_im;
    neg_re = x.re[XW-1];
    neg_im = x.im[XW-1];
    r = neg_re ? -qv_t'(x.re) : qv_t'(x.re);
    i = neg_im ? -qv_t'(x.im) : qv_t'(x.im);
    if (i <= mul_c(r))      p = neg_re ? 3'd4 : 3'd0;
    else if (r <= mul_c(i)) p = neg_im ? 3'd6 : 3'd2;
    else begin
      unique case ({neg_re, neg_im})
        2'b00:   p = 3'd1;
        2'b10:   p = 3'd3;
        2'b11:   p = 3'd5;
        default: p = 3'd7;
      endcase
    end
  end

endmodule
