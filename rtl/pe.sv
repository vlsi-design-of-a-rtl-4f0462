// pe: processing element of a C3PO linear array.
//
// A PE holds one row h~ of its array's (U+1) x U block of Hbar in an
// h_memory, a complex MAC (cmac), an operand register b, an accumulator
// register acc and, in the U "antenna" PEs, the entry x of the precoded
// vector, a projection unit and the 3-bit quantizer. The (U+1)-th PE of an
// array (IS_V = 1) holds the row v^H of Hbar and has no x of its own.
//
// Phase 1, w = Hbar*(tau*x): b holds a tau*x entry and rotates to the left
// neighbour each cycle (b_in). With base = c the PE reads column
// (P1 + c) mod U, P1 = its index (U-1 for the v PE, which sees the ring one
// cycle late), multiplies, and accumulates U products in acc. acc (psum)
// then feeds the adder tree.
// Phase 2, z = x - Hbar_tilde*w: b holds w_u broadcast from the tree, acc is
// preloaded with x (the v PE: 0, an empty slot) and the U+1 partial sums
// rotate: each cycle the PE passes acc - conj(h)*w (the v PE: acc +
// conj(h)*w, as the last column of Hbar_tilde is -v) to its left neighbour
// (green_out) and takes the one from its right (green_in). With base = c it
// reads column (P + c) mod (U+1); column U is the empty slot, whose product
// is forced to 0. After U+1 steps acc holds z for this PE's antenna.
// End: z passes the 3-stage projection; on x_we the PE stores x, b <- tau*x
// and the quantized phase index.
//
// The memory, MAC, b register, projection unit, the two cyclic exchanges and
// the +/- adder follow the paper's block diagram and text. The ring
// orders, the handling of the (U+1)-th PE, tau*x being formed in the PE, the
// registers and reset are this design's choices. Timing is set by the
// controller's control word: a memory read issued in cycle c gives a
// product usable in cycle c+2.
module pe
  import c3po_pkg::*;
#(
  parameter int unsigned U    = 16,
  parameter int unsigned P    = 0,    // position in the array, 0 .. U
  parameter bit          IS_V = 0,    // the v^H row PE (P = U)
  localparam int unsigned MAW = $clog2(U)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  ctrl_t           ctrl,
  // h~ memory write port
  input  logic            h_we,
  input  logic [MAW-1:0]  h_waddr,
  input  h_t              h_wdata,
  // run-time constants
  input  logic [TAUW-1:0] tau,
  input  logic [SCW-1:0]  scale,
  // initial x^(1) entry (unused when IS_V)
  input  x_t              x_init,
  // rings
  input  w_t              b_in,      // right neighbour's b (phase 1)
  output w_t              b_out,
  input  w_t              tx_in,     // IS_V: tau*x of PE U-1 at load
  output w_t              tx_out,    // tau*x about to be loaded into b
  input  acc_t            green_in,  // right neighbour's partial z sum
  output acc_t            green_out,
  // adder tree
  output acc_t            psum,
  input  w_t              w_in,
  // results
  output x_t              x_out,
  output logic [2:0]      xq_out
);

  localparam int unsigned P1 = IS_V ? U - 1 : P;

  // ---------------- addressing --------------------------------------
  logic [MAW-1:0] raddr;
  logic           bubble;
  always_comb begin
    logic [8:0] a1, a2;
    a1 = 9'(P1) + 9'(ctrl.base);
    if (a1 >= 9'(U)) a1 = a1 - 9'(U);
    a2 = 9'(P) + 9'(ctrl.base);
    if (a2 >= 9'(U + 1)) a2 = a2 - 9'(U + 1);
    bubble = ctrl.p2_issue && (a2 == 9'(U));
    if (ctrl.p2_issue) raddr = bubble ? '0 : MAW'(a2);
    else               raddr = MAW'(a1);
  end

  h_t h_rd;
  h_memory #(.DEPTH(U)) u_mem (
    .clk, .we(h_we), .waddr(h_waddr), .wdata(h_wdata), .raddr, .rdata(h_rd)
  );

  // ---------------- MAC ---------------------------------------------
  w_t   b, b_q;
  logic ph2_q, bub_q;
  acc_t acc, prod, sum;

  always_ff @(posedge clk) begin
    b_q   <= b;
    ph2_q <= ctrl.p2_issue;
    bub_q <= bubble;
  end

  cmac u_mac (
    .clk, .h(h_rd), .b(b_q), .conj_h(ph2_q), .ph2(ph2_q), .zero(bub_q),
    .acc_in(acc), .first(ctrl.acc_first), .neg(ctrl.acc_p2 && !IS_V),
    .prod, .sum
  );

  assign green_out = sum;
  assign psum      = acc;
  assign b_out     = b;

  // ---------------- tau * x -----------------------------------------
  function automatic w_t tau_x(input x_t xv, input logic [TAUW-1:0] t);
    w_t r;
    r.re = WW'(sat(64'((xv.re * $signed({1'b0, t})) >>> XF), XW));
    r.im = WW'(sat(64'((xv.im * $signed({1'b0, t})) >>> XF), XW));
    return r;
  endfunction

  x_t x, x_proj;
  w_t tx_self;
  logic [2:0] q_new;

  if (!IS_V) begin : g_x
    logic [2:0] region_unused;
    x_t x_next;
    projection_unit u_proj (.clk, .z(acc), .scale, .x(x_proj), .region(region_unused));
    assign x_next  = ctrl.ld_init ? x_init : x_proj;
    assign tx_self = tau_x(x_next, tau);
    cm_quantizer u_q (.x(x_next), .p(q_new));
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        x      <= '0;
        xq_out <= '0;
      end else if (ctrl.ld_init || ctrl.x_we) begin
        x      <= x_next;
        xq_out <= q_new;
      end
    end
  end else begin : g_v
    assign x_proj  = '0;
    assign tx_self = tx_in;
    assign q_new   = '0;
    assign x       = '0;
    assign xq_out  = '0;
  end

  assign tx_out = tx_self;
  assign x_out  = x;

  // ---------------- b and acc registers ------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b   <= '0;
      acc <= '0;
    end else begin
      if (ctrl.ld_init || ctrl.x_we) b <= tx_self;
      else if (ctrl.b_load_w)        b <= w_in;
      else if (ctrl.b_shift)         b <= b_in;

      if (ctrl.acc_first || ctrl.acc_p1) acc <= sum;
      else if (ctrl.acc_pre) begin
        acc.re <= IS_V ? '0 : AW'(x.re) <<< (AF2 - XF);
        acc.im <= IS_V ? '0 : AW'(x.im) <<< (AF2 - XF);
      end
      else if (ctrl.acc_p2) acc <= green_in;
    end
  end

endmodule
