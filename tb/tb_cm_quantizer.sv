// tb_cm_quantizer: random x entries; checks the phase index against the
// bit-exact reference and, away from the decision rays, against the nearest
// of the eight phases found with real arithmetic; requires all eight
// indices to occur.
module tb_cm_quantizer;
  import c3po_pkg::*;
  import c3po_ref_pkg::*;
  x_t x;
  logic [2:0] p;
  int checks = 0, failures = 0;
  int seen [8];

  cm_quantizer dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (seen[i]) seen[i] = 0;
    for (int n = 0; n < 3000; n++) begin
      cpx_t xx;
      real ang, best, d;
      int pn, pe;
      xx.re = longint'($urandom_range(16383)) - 8192;
      xx.im = longint'($urandom_range(16383)) - 8192;
      if (n < 8) begin  // exact corners
        xx.re = longint'($rtoi(256.0 * $cos(3.14159265358979 * n / 4.0)));
        xx.im = longint'($rtoi(256.0 * $sin(3.14159265358979 * n / 4.0)));
      end
      x.re = XW'(xx.re); x.im = XW'(xx.im);
      #1;
      pe = quant(xx);
      checks++;
      if (int'(p) != pe) begin
        failures++;
        $display("mismatch: x=%0d,%0d got %0d exp %0d", xx.re, xx.im, p, pe);
      end
      seen[p]++;
      // real-valued nearest phase, skipped within 3 degrees of a boundary
      ang = $atan2(real'(xx.im), real'(xx.re)) * 180.0 / 3.14159265358979;
      if (ang < 0) ang += 360.0;
      pn = int'($floor((ang + 22.5) / 45.0)) % 8;
      d = ang + 22.5 - 45.0 * $floor((ang + 22.5) / 45.0);
      if (d > 3.0 && d < 42.0 && (xx.re != 0 || xx.im != 0)) begin
        checks++;
        if (int'(p) != pn) begin
          failures++;
          $display("not nearest: x=%0d,%0d got %0d nearest %0d", xx.re, xx.im, p, pn);
        end
      end
      #9;
    end
    foreach (seen[i]) begin
      checks++;
      if (seen[i] == 0) begin failures++; $display("phase %0d never output", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
