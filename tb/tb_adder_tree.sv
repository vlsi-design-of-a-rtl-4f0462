// tb_adder_tree: drives a new random vector of N partial sums into the
// adder tree every cycle and checks that the output L = log2(N) cycles later
// equals the saturated pairwise sum computed by the reference model. Every
// tenth vector is full scale so that the 21-bit saturation is exercised.
module tb_adder_tree;
  import c3po_pkg::*;
  import c3po_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned L = $clog2(N);
  logic clk = 0;
  acc_t in [N];
  w_t out;
  cpx_t expv [$];
  int checks = 0, failures = 0, saturated = 0;

  adder_tree #(.N(N)) dut (.clk, .in, .out);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      cpx_t v[], nx[];
      @(negedge clk);
      v = new[N];
      foreach (v[j]) begin
        if (n % 10 == 9) begin
          v[j].re = 131071 - j; v[j].im = -131072;
        end else begin
          v[j].re = longint'($urandom_range(60000)) - 30000;
          v[j].im = longint'($urandom_range(60000)) - 30000;
        end
        in[j].re = AW'(v[j].re);
        in[j].im = AW'(v[j].im);
      end
      for (int l = 0; l < L; l++) begin
        nx = new[v.size() / 2];
        foreach (nx[m]) nx[m] = add_sat(v[2*m], v[2*m+1], 0, 21);
        v = nx;
      end
      expv.push_back(v[0]);
      #1;
      if (n >= L) begin
        cpx_t e;
        e = expv[n - L];
        checks++;
        if (longint'(out.re) != e.re || longint'(out.im) != e.im) begin
          failures++;
          $display("vector %0d: got %0d,%0d expected %0d,%0d", n - L, out.re, out.im, e.re, e.im);
        end
        if (e.re == 1048575 || e.im == -1048576) saturated++;
      end
    end
    checks++;
    if (saturated == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
