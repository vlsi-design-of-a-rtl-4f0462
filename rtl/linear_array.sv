// linear_array: one of the B/U linear arrays of the C3PO architecture.
//
// U+1 PEs work on a (U+1) x U block of Hbar and on U entries of x (U
// antennas). PE u (u = 0 .. U-1) owns antenna u of the array and row u of
// the block; PE U owns the row v^H. Two cyclic exchanges connect them, as
// in Cannon's matrix-vector algorithm the paper builds on:
//   b ring   (phase 1): PE u takes b of PE u+1, PE U-1 takes b of PE 0
//            (a ring of the U tau*x entries); PE U also takes b of PE 0, so
//            it sees the same U entries one cycle after PE 0.
//   z ring   (phase 2): PE u takes the partial sum of PE u+1, PE U that of
//            PE 0, a ring of U+1 accumulators of which one is an empty slot.
// At load time PE U's b is set to tau*x of PE U-1 so that its sequence is
// aligned with the ring. psum carries each PE's phase-1 result to the adder
// tree of its row; w_in brings the tree's result back.
// Which PE feeds which, and the empty slot in the z ring, are this design's
// reading of the block diagram, whose wrap-around wiring around the
// (U+1)-th PE cannot be read in full.
// h write port: row h_row (0 .. U), column h_col (0 .. U-1).
module linear_array
  import c3po_pkg::*;
#(
  parameter int unsigned U   = 16,
  localparam int unsigned MAW = $clog2(U),
  localparam int unsigned RW  = $clog2(U + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  ctrl_t           ctrl,
  input  logic            h_we,
  input  logic [RW-1:0]   h_row,
  input  logic [MAW-1:0]  h_col,
  input  h_t              h_wdata,
  input  logic [TAUW-1:0] tau,
  input  logic [SCW-1:0]  scale,
  input  x_t              x_init [U],
  output acc_t            psum   [U+1],
  input  w_t              w_in   [U+1],
  output x_t              x_out  [U],
  output logic [2:0]      xq_out [U]
);

  w_t   b_o [U+1];
  w_t   tx_o [U+1];
  acc_t g_o [U+1];

  for (genvar p = 0; p <= U; p++) begin : g_pe
    localparam bit ISV = (p == U);
    localparam int unsigned BSRC = (p >= U - 1) ? 0 : p + 1;  // b ring source
    localparam int unsigned GSRC = (p == U) ? 0 : p + 1;      // z ring source
    x_t         xi, xo;
    logic [2:0] qo;
    assign xi = ISV ? '0 : x_init[ISV ? 0 : p];
    pe #(.U(U), .P(p), .IS_V(ISV)) u_pe (
      .clk, .rst_n, .ctrl,
      .h_we(h_we && (h_row == RW'(p))), .h_waddr(h_col), .h_wdata,
      .tau, .scale,
      .x_init(xi),
      .b_in(b_o[BSRC]), .b_out(b_o[p]),
      .tx_in(tx_o[ISV ? U - 1 : p]), .tx_out(tx_o[p]),
      .green_in(g_o[GSRC]), .green_out(g_o[p]),
      .psum(psum[p]), .w_in(w_in[p]),
      .x_out(xo), .xq_out(qo)
    );
    if (!ISV) begin : g_out
      assign x_out[p]  = xo;
      assign xq_out[p] = qo;
    end
  end

endmodule
