// tb_pe: one processing element (U = 4, position P = 1) driven by the
// controller (L = 0, T = 17) for two iterations, with the testbench playing
// the neighbours: it feeds b_in with the tau*x values the ring would
// deliver, a constant w from the "tree" and random partial sums on
// green_in. Checked against the reference model: the b sequence, the
// phase-1 partial sum psum, every phase-2 output green_out (including the
// empty slot), and after x_we the projected x, its phase index and the new
// tau*x. A second PE instance with IS_V = 1 checks the v-row variant (sign
// of the phase-2 product, empty-slot preload, b loaded from tx_in).
module tb_pe;
  import c3po_pkg::*;
  import c3po_ref_pkg::*;
  localparam int U = 4, P = 1, L = 0, T = 2 * U + L + 9;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] tmax;
  ctrl_t ctrl;
  logic busy, iter_done, done;
  logic h_we = 0;
  logic [1:0] h_waddr;
  h_t h_wdata;
  logic [TAUW-1:0] tau;
  logic [SCW-1:0] scale;
  x_t x_init;
  w_t b_in, b_out, tx_in, tx_out, w_in, vb_out, vtx_out;
  acc_t green_in, green_out, psum, vgreen_out, vpsum;
  x_t x_out, vx_out;
  logic [2:0] xq_out, vxq_out;
  int checks = 0, failures = 0;

  controller #(.U(U), .L(L)) u_ctrl (.clk, .rst_n, .start, .tmax, .ctrl, .busy, .iter_done, .done);

  pe #(.U(U), .P(P), .IS_V(0)) dut (
    .clk, .rst_n, .ctrl, .h_we, .h_waddr, .h_wdata, .tau, .scale, .x_init,
    .b_in, .b_out, .tx_in, .tx_out, .green_in, .green_out, .psum, .w_in,
    .x_out, .xq_out);

  pe #(.U(U), .P(U), .IS_V(1)) dut_v (
    .clk, .rst_n, .ctrl, .h_we, .h_waddr, .h_wdata, .tau, .scale, .x_init,
    .b_in, .b_out(vb_out), .tx_in, .tx_out(vtx_out), .green_in, .green_out(vgreen_out),
    .psum(vpsum), .w_in, .x_out(vx_out), .xq_out(vxq_out));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("%s", what); end
  endtask

  function automatic cpx_t c_of(input longint r, input longint i);
    cpx_t c; c.re = r; c.im = i; return c;
  endfunction

  initial begin
    cpx_t h [U], tx [U], xv, w, acc, accv, e, ev, tv, z, zv, zero;
    longint tau_i, sc_i;
    int rg;
    zero = c_of(0, 0);
    tmax = 2; tau = '0; scale = '0; x_init = '0; b_in = '0; tx_in = '0; w_in = '0; green_in = '0;
    h_waddr = '0; h_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < U; j++) begin
      h[j] = c_of(longint'($urandom_range(1023)) - 512, longint'($urandom_range(1023)) - 512);
      @(negedge clk);
      h_we = 1; h_waddr = 2'(j); h_wdata.re = HW'(h[j].re); h_wdata.im = HW'(h[j].im);
    end
    @(negedge clk);
    h_we = 0;
    tau_i = longint'($urandom_range(2000, 6000)); sc_i = longint'($urandom_range(256, 400));
    tau = TAUW'(tau_i); scale = SCW'(sc_i);
    xv = c_of(longint'($urandom_range(511)) - 256, longint'($urandom_range(511)) - 256);
    x_init.re = XW'(xv.re); x_init.im = XW'(xv.im);
    tv = c_of(longint'($urandom_range(4095)) - 2048, longint'($urandom_range(4095)) - 2048);
    tx_in.re = WW'(tv.re); tx_in.im = WW'(tv.im);   // tau*x of PE U-1 for the v PE
    start = 1;
    @(negedge clk);
    start = 0;
    for (int it = 0; it < 2; it++) begin
      // per iteration: the tau*x ring contents
      foreach (tx[j]) tx[j] = c_of(longint'($urandom_range(8191)) - 4096, longint'($urandom_range(8191)) - 4096);
      tx[P] = tau_x(xv, tau_i);
      w = c_of(longint'($urandom_range(400000)) - 200000, longint'($urandom_range(400000)) - 200000);
      for (int c = 0; c < T; c++) begin
        // neighbour b for this cycle: what PE P+1 holds in cycle c
        b_in.re = WW'(tx[(P + c + 1) % U].re); b_in.im = WW'(tx[(P + c + 1) % U].im);
        w_in.re = WW'(w.re); w_in.im = WW'(w.im);
        green_in.re = AW'(longint'($urandom_range(40000)) - 20000);
        green_in.im = AW'(longint'($urandom_range(40000)) - 20000);
        #1;
        if (c < U)
          chk(longint'(b_out.re) == tx[(P + c) % U].re && longint'(b_out.im) == tx[(P + c) % U].im,
              $sformatf("it %0d c %0d: b_out", it, c));
        if (c >= 2 && c <= U + 1) begin
          int col;
          col = (P + c - 2) % U;
          if (c == 2) acc = mac_prod(h[col], tx[col], 0);
          else acc = add_sat(acc, mac_prod(h[col], tx[col], 0), 0, 18);
        end
        if (c == U + 2)
          chk(longint'(psum.re) == acc.re && longint'(psum.im) == acc.im,
              $sformatf("it %0d: psum %0d,%0d exp %0d,%0d", it, psum.re, psum.im, acc.re, acc.im));
        if (c >= U + 5 + L && c <= 2 * U + 5 + L) begin
          int k, col, colv;
          k = c - (U + 5 + L);
          col = (P + k) % (U + 1);
          colv = (U + k) % (U + 1);
          if (k == 0) begin
            acc = c_of(xv.re * 8, xv.im * 8);
            accv = zero;
          end
          e = add_sat(acc, (col == U) ? zero : mac_prod(h[col], w, 1), 1, 18);
          ev = add_sat(accv, (colv == U) ? zero : mac_prod(h[colv], w, 1), 0, 18);
          chk(longint'(green_out.re) == e.re && longint'(green_out.im) == e.im,
              $sformatf("it %0d step %0d: green_out %0d,%0d exp %0d,%0d", it, k,
                        green_out.re, green_out.im, e.re, e.im));
          chk(longint'(vgreen_out.re) == ev.re && longint'(vgreen_out.im) == ev.im,
              $sformatf("it %0d step %0d: v green_out", it, k));
          acc = c_of(longint'(green_in.re), longint'(green_in.im));
          accv = acc;
        end
        if (c == T - 1) begin
          xv = proj(acc, sc_i, rg);
          e = tau_x(xv, tau_i);
          chk(longint'(tx_out.re) == e.re && longint'(tx_out.im) == e.im, "tx_out at x_we");
        end
        @(negedge clk);
      end
      chk(longint'(x_out.re) == xv.re && longint'(x_out.im) == xv.im,
          $sformatf("it %0d: x_out %0d,%0d exp %0d,%0d", it, x_out.re, x_out.im, xv.re, xv.im));
      chk(int'(xq_out) == quant(xv), "xq_out");
      e = tau_x(xv, tau_i);
      chk(longint'(b_out.re) == e.re && longint'(b_out.im) == e.im, "b after x_we");
      chk(longint'(vb_out.re) == tv.re && longint'(vb_out.im) == tv.im, "v PE b from tx_in");
      // the v PE's x outputs are tied off
      chk(vx_out == '0 && vxq_out == '0, "v PE x outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
