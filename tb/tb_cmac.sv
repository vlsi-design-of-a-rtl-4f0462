// tb_cmac: random operands in both phases (h*b with 15 fraction bits out,
// conj(h)*b with 11), with the zero, first and neg controls; checks the
// registered product and the combinational add/subtract against the
// reference model. Large operands are included to reach the 18-bit
// saturation.
module tb_cmac;
  import c3po_pkg::*;
  import c3po_ref_pkg::*;
  logic clk = 0;
  h_t h; w_t b; logic conj_h, ph2, zero, first, neg;
  acc_t acc_in, prod, sum;
  int checks = 0, failures = 0, sat_seen = 0;

  cmac dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      cpx_t hh, bb, ai, ep, es, zc;
      bit p2, z, f, ng;
      @(negedge clk);
      p2 = $urandom_range(1); z = ($urandom_range(7) == 0);
      f = $urandom_range(1); ng = $urandom_range(1);
      hh.re = longint'($urandom_range(2047)) - 1024; hh.im = longint'($urandom_range(2047)) - 1024;
      if (p2) begin
        bb.re = longint'($urandom_range(2097151)) - 1048576; bb.im = longint'($urandom_range(2097151)) - 1048576;
        if (n % 3 != 0) begin bb.re = fdiv(bb.re, 4); bb.im = fdiv(bb.im, 4); end
      end else begin
        bb.re = longint'($urandom_range(16383)) - 8192; bb.im = longint'($urandom_range(16383)) - 8192;
      end
      ai.re = longint'($urandom_range(262143)) - 131072; ai.im = longint'($urandom_range(262143)) - 131072;
      h.re = HW'(hh.re); h.im = HW'(hh.im);
      b.re = WW'(bb.re); b.im = WW'(bb.im);
      conj_h = p2; ph2 = p2; zero = z;
      @(posedge clk); #1;
      first = f; neg = ng;
      acc_in.re = AW'(ai.re); acc_in.im = AW'(ai.im);
      #1;
      zc.re = 0; zc.im = 0;
      ep = z ? zc : mac_prod(hh, bb, p2);
      if (ep.re == 131071 || ep.re == -131072) sat_seen++;
      es = add_sat(f ? zc : ai, ep, ng, 18);
      checks += 2;
      if (longint'(prod.re) != ep.re || longint'(prod.im) != ep.im) begin
        failures++;
        $display("prod mismatch n=%0d: got %0d,%0d exp %0d,%0d", n, prod.re, prod.im, ep.re, ep.im);
      end
      if (longint'(sum.re) != es.re || longint'(sum.im) != es.im) begin
        failures++;
        $display("sum mismatch n=%0d: got %0d,%0d exp %0d,%0d", n, sum.re, sum.im, es.re, es.im);
      end
    end
    checks++;
    if (sat_seen == 0) begin failures++; $display("no saturation seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
