// adder_tree: sums the N = B/U partial results of one row u of Hbar*(tau*x),
// one from each linear array, into the entry w_u.
//
// A binary tree of L = log2(N) levels, each level registered, so the sum of
// the inputs presented in one cycle appears at the output L cycles later
// (with N = 1 the output is the input, unregistered). The paper gives the
// tree's 21-bit, 15-fraction-bit format and draws one tree per row with
// registered adders; inputs (18 bit, 15 fraction bits) are sign-extended
// and every level saturates to 21 bits, which is this design's choice.
// N must be a power of two (the paper requires B to be a multiple of U and
// evaluates B/U = 2, 4, 8, 16).
module adder_tree
  import c3po_pkg::*;
#(
  parameter int unsigned N = 16,
  localparam int unsigned L = $clog2(N)
) (
  input  logic clk,
  input  acc_t in [N],
  output w_t   out
);

  w_t lvl [L+1][N];

  for (genvar j = 0; j < N; j++) begin : g_in
    assign lvl[0][j].re = WW'(in[j].re);
    assign lvl[0][j].im = WW'(in[j].im);
  end

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    for (genvar j = 0; j < (N >> l); j++) begin : g_add
      always_ff @(posedge clk) begin
        lvl[l][j].re <= WW'(sat(64'(lvl[l-1][2*j].re) + 64'(lvl[l-1][2*j+1].re), WW));
        lvl[l][j].im <= WW'(sat(64'(lvl[l-1][2*j].im) + 64'(lvl[l-1][2*j+1].im), WW));
      end
    end
    for (genvar j = (N >> l); j < N; j++) begin : g_unused
      assign lvl[l][j] = '0;
    end
  end

  assign out = lvl[L][0];

endmodule
