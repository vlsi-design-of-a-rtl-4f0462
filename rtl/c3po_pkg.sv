// c3po_pkg: shared fixed-point formats, control word and constants of the
// C3PO 3-bit constant-modulus precoder.
//
// Number formats (all two's complement, complex values carry re and im):
//   h_t    11 bit, 8 fraction bits   entries of the augmented channel matrix Hbar
//   x_t    14 bit, 8 fraction bits   precoded vector x
//   tx_t   14 bit, 13 fraction bits  tau * x  (circulated in the first product)
//   acc_t  18 bit                    MAC accumulator: 15 fraction bits while
//                                    forming w, 11 fraction bits while forming z
//   w_t    21 bit, 15 fraction bits  adder-tree output w; also the width of the
//                                    PE operand register b
//   p_t    15 bit, 7 fraction bits   scaled z entering the octagon projection
// These widths follow the fixed-point section of the paper; how the values are
// rounded (truncation towards minus infinity) and that every narrowing
// saturates are choices of this design.
package c3po_pkg;

  localparam int unsigned HW   = 11;  localparam int unsigned HF  = 8;
  localparam int unsigned XW   = 14;  localparam int unsigned XF  = 8;
  localparam int unsigned TXF  = 13;
  localparam int unsigned AW   = 18;
  localparam int unsigned AF1  = 15;  localparam int unsigned AF2 = 11;
  localparam int unsigned WW   = 21;  localparam int unsigned WF  = 15;
  localparam int unsigned PW   = 15;  localparam int unsigned PF  = 7;
  localparam int unsigned TAUW = 14;  // tau: unsigned, 13 fraction bits
  localparam int unsigned SCW  = 10;  // 1/(1-tau*delta): unsigned, 8 fraction bits
  localparam int unsigned SCF  = 8;

  typedef struct packed {
    logic signed [HW-1:0] re;
    logic signed [HW-1:0] im;
  } h_t;

  typedef struct packed {
    logic signed [XW-1:0] re;
    logic signed [XW-1:0] im;
  } x_t;

  typedef struct packed {
    logic signed [AW-1:0] re;
    logic signed [AW-1:0] im;
  } acc_t;

  // b register / w: wide enough for w, tau*x is sign-extended into it
  typedef struct packed {
    logic signed [WW-1:0] re;
    logic signed [WW-1:0] im;
  } w_t;

  typedef struct packed {
    logic signed [PW-1:0] re;
    logic signed [PW-1:0] im;
  } p_t;

  // Control word broadcast by the controller to every PE of every array.
  typedef struct packed {
    logic       ld_init;   // load x^(1) from the inputs, tau*x into b
    logic       x_we;      // write projected x and tau*x (end of an iteration)
    logic       b_shift;   // phase 1: b takes the neighbour's b (ring of U)
    logic       b_load_w;  // b takes w from the adder tree
    logic       p1_issue;  // phase 1: read memory / issue product
    logic       p2_issue;  // phase 2: read memory / issue product
    logic [7:0] base;      // cycle index within the current phase
    logic       acc_first; // phase 1: first accumulation (acc <- prod)
    logic       acc_p1;    // phase 1: acc <- acc + prod
    logic       acc_pre;   // phase 2: preload acc with x (11 fraction bits)
    logic       acc_p2;    // phase 2: acc <- neighbour's acc -/+ its product
  } ctrl_t;

  // Saturate a wide signed value to n bits (n <= 64).
  function automatic logic signed [63:0] sat(input logic signed [63:0] v, input int unsigned n);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (n - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (n - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

endpackage
