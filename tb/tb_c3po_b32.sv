// tb_c3po_b32: the precoder in the smallest configuration of the original
// implementation results, U = 16 users and B = 32 antennas (2 arrays of 17
// PEs, 1-level adder trees), with t_max = 9 and the two constellations of
// the error-rate study: a BPSK run followed by a 16-QAM run on new random
// i.i.d. Rayleigh channels, both on the same instance (restart after done).
// Every iteration's x and the final phase indices are compared with the
// bit-exact reference model; the iteration period must be
// 2U + log2(B/U) + 9 = 42 cycles, the figure reported for this size; the
// residual ||A x|| of the output must be below that of quantized MRT; and
// all eight phases and all six projection regions must occur.
// B = 64 and 128 differ from this and from the full-size test only in B.
module tb_c3po_b32;
  import c3po_pkg::*;
  import c3po_ref_pkg::*;
  localparam int U = 16, B = 32, NA = B / U, L = $clog2(NA), T = 2 * U + L + 9;
  localparam int AAW = (NA > 1) ? $clog2(NA) : 1, MAW = $clog2(U), RW = $clog2(U + 1);

  logic clk = 0, rst_n = 0;
  logic h_we = 0;
  logic [AAW-1:0] h_arr;
  logic [RW-1:0] h_row;
  logic [MAW-1:0] h_col;
  h_t h_wdata;
  logic [TAUW-1:0] tau;
  logic [SCW-1:0] scale;
  logic [7:0] tmax;
  logic start = 0;
  x_t x_init [B];
  x_t x_out [B];
  logic [2:0] xq_out [B];
  logic busy, iter_done, done;

  int checks = 0, failures = 0;
  int regcnt [6];
  int phase_seen [8];
  int iters_run = 0, zero_runs = 0, restarts = 0;

  c3po_top #(.U(U), .B(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint qnt(input real v, input int frac, input int bits);
    return satn(longint'($floor(v * (2.0 ** frac) + 0.5)), bits);
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    u2 = real'($urandom_range(1000000)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  // ||A x||^2 = ||H x - s (s^H H x)/||s||^2||^2 for x_j = exp(j*pi*p_j/4)
  function automatic real residual(input real hr [U][B], input real hi [U][B],
                                   input real sr [U], input real si [U], input int p [B]);
    real yr [U], yi [U], ar, ai, ns, res;
    ns = 0.0; ar = 0.0; ai = 0.0; res = 0.0;
    for (int u = 0; u < U; u++) begin
      yr[u] = 0.0; yi[u] = 0.0;
      for (int j = 0; j < B; j++) begin
        real cr, ci;
        cr = $cos(3.14159265358979 * p[j] / 4.0);
        ci = $sin(3.14159265358979 * p[j] / 4.0);
        yr[u] += hr[u][j] * cr - hi[u][j] * ci;
        yi[u] += hr[u][j] * ci + hi[u][j] * cr;
      end
      ns += sr[u] * sr[u] + si[u] * si[u];
      ar += sr[u] * yr[u] + si[u] * yi[u];   // s^H y
      ai += sr[u] * yi[u] - si[u] * yr[u];
    end
    for (int u = 0; u < U; u++) begin
      real er, ei;
      er = yr[u] - (sr[u] * ar - si[u] * ai) / ns;
      ei = yi[u] - (sr[u] * ai + si[u] * ar) / ns;
      res += er * er + ei * ei;
    end
    return res;
  endfunction

  task automatic do_run(input int tm, input real hstd, input real tau_r, input real scale_r,
                        input bit qam16);
    real hr [U][B], hi [U][B], sr [U], si [U], xr [B], xi [B], ns;
    cpx_t hb [], xm [];
    longint tau_i, sc_i;
    int p_mrt [B], p_c3po [B];
    real res_mrt, res_c3po;
    int t, it;
    hb = new[(U + 1) * B];
    xm = new[B];
    ns = 0.0;
    for (int u = 0; u < U; u++) begin
      if (qam16) begin  // unit average energy: levels {-3,-1,1,3}/sqrt(10)
        sr[u] = real'(2 * int'($urandom_range(3)) - 3) / $sqrt(10.0);
        si[u] = real'(2 * int'($urandom_range(3)) - 3) / $sqrt(10.0);
      end else begin    // BPSK
        sr[u] = $urandom_range(1) ? 1.0 : -1.0;
        si[u] = 0.0;
      end
      ns += sr[u] * sr[u] + si[u] * si[u];
      for (int j = 0; j < B; j++) begin
        hr[u][j] = hstd * gauss() / $sqrt(2.0);
        hi[u][j] = hstd * gauss() / $sqrt(2.0);
      end
    end
    for (int j = 0; j < B; j++) begin
      xr[j] = 0.0; xi[j] = 0.0;
      for (int u = 0; u < U; u++) begin  // (H^H s)_j = sum conj(h_uj) s_u
        xr[j] += hr[u][j] * sr[u] + hi[u][j] * si[u];
        xi[j] += hr[u][j] * si[u] - hi[u][j] * sr[u];
      end
    end
    for (int u = 0; u < U; u++)
      for (int j = 0; j < B; j++) begin
        hb[u*B + j].re = qnt(hr[u][j], 8, 11);
        hb[u*B + j].im = qnt(hi[u][j], 8, 11);
      end
    for (int j = 0; j < B; j++) begin  // row U: v^H = conj(v)
      hb[U*B + j].re = qnt(xr[j] / $sqrt(ns), 8, 11);
      hb[U*B + j].im = qnt(-xi[j] / $sqrt(ns), 8, 11);
      xm[j].re = qnt(xr[j], 8, 14);
      xm[j].im = qnt(xi[j], 8, 14);
    end
    foreach (p_mrt[j]) p_mrt[j] = quant(xm[j]);
    tau_i = qnt(tau_r, 13, 15);
    sc_i = qnt(scale_r, 8, 11);
    // load Hbar
    for (int u = 0; u <= U; u++)
      for (int j = 0; j < B; j++) begin
        @(negedge clk);
        h_we = 1; h_arr = AAW'(j / U); h_row = RW'(u); h_col = MAW'(j % U);
        h_wdata.re = HW'(hb[u*B + j].re); h_wdata.im = HW'(hb[u*B + j].im);
      end
    @(negedge clk);
    h_we = 0;
    tau = TAUW'(tau_i); scale = SCW'(sc_i); tmax = 8'(tm);
    foreach (x_init[j]) begin
      x_init[j].re = XW'(xm[j].re); x_init[j].im = XW'(xm[j].im);
    end
    start = 1;
    @(negedge clk);
    start = 0;
    foreach (x_init[j]) x_init[j] = '0;  // sampled only with start
    t = 1; it = 0;
    while (!done && t < 100000) begin
      if (iter_done) begin
        it++;
        checks++;
        if (t != it * T) begin
          failures++;
          $display("iteration %0d ended at cycle %0d, expected %0d", it, t, it * T);
        end
        iterate(U, B, hb, xm, tau_i, sc_i, regcnt);
        @(negedge clk); t++;
        foreach (xm[j]) begin
          checks++;
          if (longint'(x_out[j].re) != xm[j].re || longint'(x_out[j].im) != xm[j].im) begin
            failures++;
            if (failures < 20)
              $display("iter %0d x[%0d]: got %0d,%0d exp %0d,%0d", it, j,
                       x_out[j].re, x_out[j].im, xm[j].re, xm[j].im);
          end
        end
      end else begin
        @(negedge clk); t++;
      end
    end
    checks++;
    if (t != tm * T + 1) begin
      failures++;
      $display("done after %0d cycles, expected %0d", t, tm * T + 1);
    end
    checks++;
    if (it != tm) begin failures++; $display("%0d iterations, expected %0d", it, tm); end
    foreach (xm[j]) begin
      int pe;
      pe = quant(xm[j]);
      checks += 2;
      if (longint'(x_out[j].re) != xm[j].re || longint'(x_out[j].im) != xm[j].im) begin
        failures++;
        $display("final x[%0d] mismatch", j);
      end
      if (int'(xq_out[j]) != pe) begin
        failures++;
        $display("xq[%0d]: got %0d exp %0d", j, xq_out[j], pe);
      end
      phase_seen[pe]++;
      p_c3po[j] = pe;
    end
    res_mrt = residual(hr, hi, sr, si, p_mrt);
    res_c3po = residual(hr, hi, sr, si, p_c3po);
    $display("||A x||^2: quantized MRT %f, C3PO %f", res_mrt, res_c3po);
    checks++;
    if (!(res_c3po < res_mrt)) begin
      failures++;
      $display("C3PO output does not improve on quantized MRT");
    end
    iters_run += it;
    if (tm == 0) zero_runs++;
    if (iters_run > 0) restarts++;
  endtask

  initial begin
    foreach (regcnt[i]) regcnt[i] = 0;
    foreach (phase_seen[i]) phase_seen[i] = 0;
    h_arr = '0; h_row = '0; h_col = '0; h_wdata = '0; tau = '0; scale = '0; tmax = '0;
    foreach (x_init[j]) x_init[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do_run(9, 0.25, 0.1, 1.1, 0);
    do_run(9, 0.25, 0.1, 1.1, 1);
    $display("regions A..F: %0d %0d %0d %0d %0d %0d; iterations %0d",
             regcnt[0], regcnt[1], regcnt[2], regcnt[3], regcnt[4], regcnt[5], iters_run);
    // coverage: every output phase and every projection region occurred
    foreach (phase_seen[p]) begin
      checks++;
      if (phase_seen[p] == 0) begin failures++; $display("phase %0d never produced", p); end
    end
    foreach (regcnt[r]) begin
      checks++;
      if (regcnt[r] == 0) begin failures++; $display("projection region %0d never used", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
