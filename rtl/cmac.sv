// cmac: complex multiply-accumulate unit of a C3PO processing element.
//
// One complex product per cycle, h * b or conj(h) * b, where h is an entry of
// Hbar (11 bit, 8 fraction bits) and b the PE's operand register (21 bit).
// Four real multiplications and two additions form the exact product, which
// is then shifted to the accumulator format and saturated to 18 bits:
//   phase 1 (ph2 = 0): b = tau*x with 13 fraction bits, product h*b,
//                      8+13 = 21 fraction bits -> 15 fraction bits
//   phase 2 (ph2 = 1): b = w with 15 fraction bits, product conj(h)*b,
//                      8+15 = 23 fraction bits -> 11 fraction bits
// "zero" forces the product to 0 (the idle slot of the phase-2 ring).
// The product is registered: it appears on prod one clock after h and b.
//
// The add/subtract stage is combinational on the registered product:
//   sum = (first ? 0 : acc_in) + prod     (neg = 0)
//   sum = (first ? 0 : acc_in) - prod     (neg = 1)
// saturated to 18 bits. The paper gives the 18-bit accumulator and its two
// fraction-bit settings and draws an adder with a +/- control; the exact
// split into pipeline stages, truncation and saturation are this design's.
module cmac
  import c3po_pkg::*;
(
  input  logic clk,
  input  h_t   h,
  input  w_t   b,
  input  logic conj_h,  // use conj(h)
  input  logic ph2,     // 1: 11 fraction bits out, 0: 15 fraction bits out
  input  logic zero,    // force the product to zero
  input  acc_t acc_in,
  input  logic first,   // ignore acc_in
  input  logic neg,     // subtract the product instead of adding it
  output acc_t prod,
  output acc_t sum
);

  localparam int unsigned SH1 = HF + TXF - AF1;  // 6
  localparam int unsigned SH2 = HF + WF - AF2;   // 12

  logic signed [HW+WW:0] pr, pi;   // exact complex product

  always_comb begin
    logic signed [HW+WW-1:0] rr, ii, ri, ir;
    rr = h.re * b.re;
    ii = h.im * b.im;
    ri = h.re * b.im;
    ir = h.im * b.re;
    if (conj_h) begin
      pr = rr + ii;
      pi = ri - ir;
    end else begin
      pr = rr - ii;
      pi = ri + ir;
    end
  end

  always_ff @(posedge clk) begin
    if (zero) begin
      prod <= '0;
    end else if (ph2) begin
      prod.re <= AW'(sat(64'(pr >>> SH2), AW));
      prod.im <= AW'(sat(64'(pi >>> SH2), AW));
    end else begin
      prod.re <= AW'(sat(64'(pr >>> SH1), AW));
      prod.im <= AW'(sat(64'(pi >>> SH1), AW));
    end
  end

  always_comb begin
    logic signed [AW:0] ar, ai;
    ar = first ? '0 : (AW+1)'(acc_in.re);
    ai = first ? '0 : (AW+1)'(acc_in.im);
    if (neg) begin
      sum.re = AW'(sat(64'(ar - (AW+1)'(prod.re)), AW));
      sum.im = AW'(sat(64'(ai - (AW+1)'(prod.im)), AW));
    end else begin
      sum.re = AW'(sat(64'(ar + (AW+1)'(prod.re)), AW));
      sum.im = AW'(sat(64'(ai + (AW+1)'(prod.im)), AW));
    end
  end

endmodule
