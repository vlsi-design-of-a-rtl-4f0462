// tb_projection_unit: feeds a new random z every cycle (with a random
// scale), checks the projected x two cycles later against the bit-exact
// reference, checks with real arithmetic that the result lies on or inside
// the octagon (up to the rounding of the short constants) and no farther
// from z than the octagon's corner nearest to it, and requires every one of
// the six regions A-F to have occurred.
module tb_projection_unit;
  import c3po_pkg::*;
  import c3po_ref_pkg::*;
  logic clk = 0;
  acc_t z;
  logic [SCW-1:0] scale;
  x_t x;
  logic [2:0] region;
  int checks = 0, failures = 0;
  int regcnt [6];
  cpx_t expx [$];
  int expr [$];
  cpx_t zin [$];
  longint scin [$];

  projection_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (regcnt[i]) regcnt[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      cpx_t zz, e;
      longint sc;
      int rg;
      @(negedge clk);
      // magnitudes around the octagon (|z| ~ 0..2) plus some large ones
      if (n % 50 == 0) begin
        zz.re = longint'($urandom_range(262143)) - 131072;
        zz.im = longint'($urandom_range(262143)) - 131072;
      end else begin
        zz.re = longint'($urandom_range(8192)) - 4096;
        zz.im = longint'($urandom_range(8192)) - 4096;
      end
      sc = longint'($urandom_range(200, 400));
      z.re = AW'(zz.re); z.im = AW'(zz.im); scale = SCW'(sc);
      e = proj(zz, sc, rg);
      expx.push_back(e); expr.push_back(rg); zin.push_back(zz); scin.push_back(sc);
      #1;
      if (n >= 2) begin
        real xr, xi, zr, zi, d, dmin, cr, ci;
        e = expx[n - 2];
        rg = expr[n - 2];
        checks += 2;
        if (longint'(x.re) != e.re || longint'(x.im) != e.im) begin
          failures++;
          $display("x mismatch %0d: got %0d,%0d exp %0d,%0d", n - 2, x.re, x.im, e.re, e.im);
        end
        if (int'(region) != rg) begin
          failures++;
          $display("region mismatch %0d: got %0d exp %0d", n - 2, region, rg);
        end
        regcnt[rg]++;
        // geometric sanity: inside the (slightly enlarged) octagon
        xr = real'(x.re) / 256.0; xi = real'(x.im) / 256.0;
        zr = real'(zin[n-2].re) * real'(scin[n-2]) / 524288.0;
        zi = real'(zin[n-2].im) * real'(scin[n-2]) / 524288.0;
        checks++;
        if ((xr < 0 ? -xr : xr) + (xi < 0 ? -xi : xi) * 0.41421 > 1.07 ||
            (xi < 0 ? -xi : xi) + (xr < 0 ? -xr : xr) * 0.41421 > 1.07) begin
          failures++;
          $display("outside octagon %0d: %f %f", n - 2, xr, xi);
        end
        // no farther from z than the nearest corner (plus rounding slack)
        dmin = 1.0e9;
        for (int p = 0; p < 8; p++) begin
          cr = $cos(3.14159265358979 * p / 4.0); ci = $sin(3.14159265358979 * p / 4.0);
          d = (zr - cr) * (zr - cr) + (zi - ci) * (zi - ci);
          if (d < dmin) dmin = d;
        end
        d = (zr - xr) * (zr - xr) + (zi - xi) * (zi - xi);
        checks++;
        if ($sqrt(d) > $sqrt(dmin) + 0.08) begin
          failures++;
          $display("projection too far %0d: z=%f,%f x=%f,%f", n - 2, zr, zi, xr, xi);
        end
      end
    end
    foreach (regcnt[i]) begin
      checks++;
      if (regcnt[i] == 0) begin failures++; $display("region %0d never seen", i); end
    end
    $display("regions A..F: %0d %0d %0d %0d %0d %0d", regcnt[0], regcnt[1], regcnt[2], regcnt[3], regcnt[4], regcnt[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
