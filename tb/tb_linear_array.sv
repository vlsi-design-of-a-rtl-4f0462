// tb_linear_array: one linear array (U = 4, 5 PEs) closed into a complete
// B = U precoder: the controller with L = 0 and w_in taken straight from
// psum (an adder tree over a single array is a wire). Random Hbar, x^(1),
// tau and scale; x after each of 5 iterations and the final phase indices
// are compared with the bit-exact reference model, and the iteration period
// is checked against 2U + 9 cycles.
module tb_linear_array;
  import c3po_pkg::*;
  import c3po_ref_pkg::*;
  localparam int U = 4, B = U, T = 2 * U + 9, TM = 5;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] tmax;
  ctrl_t ctrl;
  logic busy, iter_done, done;
  logic h_we = 0;
  logic [2:0] h_row;
  logic [1:0] h_col;
  h_t h_wdata;
  logic [TAUW-1:0] tau;
  logic [SCW-1:0] scale;
  x_t x_init [U];
  acc_t psum [U+1];
  w_t w_in [U+1];
  x_t x_out [U];
  logic [2:0] xq_out [U];
  int checks = 0, failures = 0;
  int regcnt [6];

  controller #(.U(U), .L(0)) u_ctrl (.clk, .rst_n, .start, .tmax, .ctrl, .busy, .iter_done, .done);
  linear_array #(.U(U)) dut (.clk, .rst_n, .ctrl, .h_we, .h_row, .h_col, .h_wdata, .tau, .scale,
                             .x_init, .psum, .w_in, .x_out, .xq_out);

  for (genvar u = 0; u <= U; u++) begin : g_w
    assign w_in[u].re = WW'(psum[u].re);
    assign w_in[u].im = WW'(psum[u].im);
  end

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cpx_t hb [], xm [];
    longint tau_i, sc_i;
    int t, it;
    foreach (regcnt[i]) regcnt[i] = 0;
    hb = new[(U + 1) * B];
    xm = new[B];
    tmax = TM; tau = '0; scale = '0; h_row = '0; h_col = '0; h_wdata = '0;
    foreach (x_init[j]) x_init[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (hb[i]) begin
      hb[i].re = longint'($urandom_range(255)) - 128;
      hb[i].im = longint'($urandom_range(255)) - 128;
      @(negedge clk);
      h_we = 1; h_row = 3'(i / B); h_col = 2'(i % B);
      h_wdata.re = HW'(hb[i].re); h_wdata.im = HW'(hb[i].im);
    end
    @(negedge clk);
    h_we = 0;
    tau_i = 4096; sc_i = 320;
    tau = TAUW'(tau_i); scale = SCW'(sc_i);
    foreach (xm[j]) begin
      xm[j].re = longint'($urandom_range(600)) - 300;
      xm[j].im = longint'($urandom_range(600)) - 300;
      x_init[j].re = XW'(xm[j].re); x_init[j].im = XW'(xm[j].im);
    end
    start = 1;
    @(negedge clk);
    start = 0;
    t = 1; it = 0;
    while (!done && t < 1000) begin
      if (iter_done) begin
        it++;
        checks++;
        if (t != it * T) begin failures++; $display("iteration %0d ended at %0d", it, t); end
        iterate(U, B, hb, xm, tau_i, sc_i, regcnt);
      end
      @(negedge clk); t++;
      if (it > 0 && t == it * T + 1)
        foreach (xm[j]) begin
          checks++;
          if (longint'(x_out[j].re) != xm[j].re || longint'(x_out[j].im) != xm[j].im) begin
            failures++;
            $display("iter %0d x[%0d]: got %0d,%0d exp %0d,%0d", it, j, x_out[j].re, x_out[j].im, xm[j].re, xm[j].im);
          end
        end
    end
    checks++;
    if (it != TM) begin failures++; $display("%0d iterations", it); end
    foreach (xm[j]) begin
      checks++;
      if (int'(xq_out[j]) != quant(xm[j])) begin failures++; $display("xq[%0d]", j); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
