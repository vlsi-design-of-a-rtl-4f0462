// c3po_top: C3PO, a 3-bit constant-modulus precoder for the massive MU-MIMO
// downlink (B base-station antennas, U single-antenna users).
//
// It runs tmax iterations of forward-backward splitting
//   z = x - tau * Hbar_tilde * Hbar * x,     x = proj_octagon( z / (1-tau*delta) )
// with Hbar = [H ; v^H] ((U+1) x B), Hbar_tilde = [H^H , -v] and
// v = H^H s / ||s||, starting from x^(1) = H^H s, and quantizes the result
// to the eight phases exp(j*2*pi*p/8).
//
// Structure (as in the paper's block diagram): B/U linear arrays of U+1
// PEs each, U+1 pipelined adder trees (one per row of Hbar, each summing the
// B/U arrays' partial results) and a controller. One iteration takes
// 2U + log2(B/U) + 9 cycles.
//
// Interface (this design's choice; the paper does not describe one):
//   - Hbar is written entry by entry through h_we/h_arr/h_row/h_col/h_wdata:
//     entry (row u, column k*U + j) goes to array k = h_arr, PE u = h_row,
//     address j = h_col. Row U holds v^H (conjugated v).
//   - tau (unsigned, 13 fraction bits) and scale = 1/(1 - tau*delta)
//     (unsigned, 8 fraction bits) are held constant during a run.
//   - x_init (x^(1), 14 bit, 8 fraction bits) is sampled in the cycle in
//     which start is high (while not busy); tmax iterations follow.
//   - done pulses for one cycle tmax*(2U+log2(B/U)+9)+1 cycles after start;
//     x_out (x^(tmax+1)) and xq_out (3-bit phase indices) then stay valid
//     until the next start. iter_done pulses at the end of each iteration.
// Computing H^H s, v and ||s|| is not part of this block.
module c3po_top
  import c3po_pkg::*;
#(
  parameter int unsigned U  = 16,
  parameter int unsigned B  = 256,
  localparam int unsigned NA  = B / U,
  localparam int unsigned L   = $clog2(NA),
  localparam int unsigned AAW = (NA > 1) ? $clog2(NA) : 1,
  localparam int unsigned MAW = $clog2(U),
  localparam int unsigned RW  = $clog2(U + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // Hbar load port
  input  logic            h_we,
  input  logic [AAW-1:0]  h_arr,
  input  logic [RW-1:0]   h_row,
  input  logic [MAW-1:0]  h_col,
  input  h_t              h_wdata,
  // run
  input  logic [TAUW-1:0] tau,
  input  logic [SCW-1:0]  scale,
  input  logic [7:0]      tmax,
  input  logic            start,
  input  x_t              x_init [B],
  output x_t              x_out  [B],
  output logic [2:0]      xq_out [B],
  output logic            busy,
  output logic            iter_done,
  output logic            done
);

  ctrl_t ctrl;

  controller #(.U(U), .L(L)) u_ctrl (
    .clk, .rst_n, .start, .tmax, .ctrl, .busy, .iter_done, .done
  );

  acc_t psum [NA][U+1];
  w_t   w    [U+1];

  for (genvar k = 0; k < NA; k++) begin : g_arr
    x_t         xi [U];
    x_t         xo [U];
    logic [2:0] qo [U];
    for (genvar j = 0; j < U; j++) begin : g_io
      assign xi[j]            = x_init[k*U + j];
      assign x_out[k*U + j]   = xo[j];
      assign xq_out[k*U + j]  = qo[j];
    end
    linear_array #(.U(U)) u_array (
      .clk, .rst_n, .ctrl,
      .h_we(h_we && (NA == 1 || h_arr == AAW'(k))), .h_row, .h_col, .h_wdata,
      .tau, .scale,
      .x_init(xi), .psum(psum[k]), .w_in(w),
      .x_out(xo), .xq_out(qo)
    );
  end

  for (genvar u = 0; u <= U; u++) begin : g_tree
    acc_t col [NA];
    for (genvar k = 0; k < NA; k++) begin : g_c
      assign col[k] = psum[k][u];
    end
    adder_tree #(.N(NA)) u_tree (.clk, .in(col), .out(w[u]));
  end

endmodule
