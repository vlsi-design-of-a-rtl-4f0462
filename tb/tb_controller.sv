// tb_controller: runs the controller (U = 4, L = 1, so T = 2U+L+9 = 18)
// for tmax = 3 and tmax = 0 and checks, cycle by cycle, every field of the
// control word against the iteration schedule, the iteration period T (the
// paper's 2U + log2(B/U) + 9) and the start-to-done latency tmax*T + 1.
module tb_controller;
  import c3po_pkg::*;
  localparam int unsigned U = 4, L = 1, T = 2 * U + L + 9;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] tmax;
  ctrl_t ctrl;
  logic busy, iter_done, done;
  int checks = 0, failures = 0;

  controller #(.U(U), .L(L)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what, input int c);
    checks++;
    if (!cond) begin
      failures++;
      $display("cycle %0d: %s", c, what);
    end
  endtask

  task automatic run(input int tm);
    int t, last_iter, n_iter;
    @(negedge clk);
    tmax = 8'(tm);
    start = 1;
    #1;
    chk(ctrl.ld_init == 1, "ld_init missing in start cycle", 0);
    @(negedge clk);
    start = 0;
    t = 1;
    last_iter = 0;
    n_iter = 0;
    while (!done && t < 1000) begin
      int c;
      c = (t - 1) % T;
      chk(busy == 1, "busy low while running", t);
      chk(ctrl.ld_init == 0, "ld_init while running", t);
      chk(ctrl.p1_issue == (c < U), "p1_issue", t);
      chk(ctrl.b_shift == (c < U), "b_shift", t);
      chk(ctrl.acc_first == (c == 2), "acc_first", t);
      chk(ctrl.acc_p1 == (c >= 3 && c <= U + 1), "acc_p1", t);
      chk(ctrl.b_load_w == (c == U + 2 + L), "b_load_w", t);
      chk(ctrl.acc_pre == (c == U + 3 + L), "acc_pre", t);
      chk(ctrl.p2_issue == (c >= U + 3 + L && c <= 2 * U + 3 + L), "p2_issue", t);
      chk(ctrl.acc_p2 == (c >= U + 5 + L && c <= 2 * U + 5 + L), "acc_p2", t);
      chk(ctrl.x_we == (c == T - 1), "x_we", t);
      if (ctrl.p1_issue) chk(int'(ctrl.base) == c, "phase-1 base", t);
      if (ctrl.p2_issue) chk(int'(ctrl.base) == c - (U + 3 + L), "phase-2 base", t);
      if (iter_done) begin
        n_iter++;
        chk(t - last_iter == T, "iteration period", t);
        last_iter = t;
      end
      @(negedge clk);
      t++;
    end
    chk(t == tm * T + 1, $sformatf("done after %0d cycles, expected %0d", t, tm * T + 1), t);
    chk(n_iter == tm, "number of iterations", t);
    @(negedge clk);
    chk(done == 0 && busy == 0, "done not a single pulse", t + 1);
  endtask

  initial begin
    tmax = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3);
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
