// controller: sequencer of the C3PO array.
//
// One C3PO iteration takes T = 2U + L + 9 clock cycles, L = log2(B/U), the
// count the paper gives for its architecture. Within an iteration the
// cycle counter cyc steps through (relative to the first cycle, 0):
//   0 .. U-1          phase 1: each PE reads h~ and multiplies it with the
//                     tau*x value in its b register; b rotates (ring of U)
//   2, 3 .. U+1       phase-1 products (2-cycle MAC latency) accumulate
//   U+2 .. U+1+L      partial sums pass the L-stage adder tree
//   U+2+L             b takes w from the tree
//   U+3+L             accumulator preloaded with x (phase-2 start value)
//   U+3+L .. 2U+3+L   phase 2: U+1 reads of conj(h~), products with w
//   U+5+L .. 2U+5+L   phase 2: partial z sums rotate through the U+1 PEs
//   2U+6+L .. 2U+8+L  projection pipeline (scale, classify, project)
//   2U+8+L = T-1      x and tau*x written; next iteration starts
// The split of the paper's cycle count into these steps is this design's.
//
// Interface: a one-cycle "start" in IDLE loads x^(1) (ld_init in that same
// cycle) and runs tmax iterations (tmax = 0: none). "iter_done" pulses in
// the last cycle of each iteration, "done" for one cycle after the last one;
// "busy" is high from the cycle after start until done. done follows start
// by tmax*T + 1 cycles. Synchronous, active-low reset.
module controller
  import c3po_pkg::*;
#(
  parameter int unsigned U = 16,
  parameter int unsigned L = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] tmax,
  output ctrl_t      ctrl,
  output logic       busy,
  output logic       iter_done,
  output logic       done
);

  localparam int unsigned T      = 2 * U + L + 9;
  localparam int unsigned CW     = $clog2(T + 1);
  localparam int unsigned C_W    = U + 2 + L;      // b <- w
  localparam int unsigned C_PRE  = U + 3 + L;      // acc preload, phase-2 issue start
  localparam int unsigned C_ACC2 = U + 5 + L;      // first phase-2 accumulation

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e         state;
  logic [CW-1:0]  cyc;
  logic [7:0]     it;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cyc   <= '0;
      it    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          cyc   <= '0;
          it    <= '0;
          state <= (tmax == 8'd0) ? S_DONE : S_RUN;
        end
        S_RUN: begin
          if (cyc == CW'(T - 1)) begin
            cyc <= '0;
            it  <= it + 8'd1;
            if (it == tmax - 8'd1) state <= S_DONE;
          end else begin
            cyc <= cyc + 1'b1;
          end
        end
        default: state <= S_IDLE;  // S_DONE lasts one cycle
      endcase
    end
  end

  always_comb begin
    logic run;
    run  = (state == S_RUN);
    ctrl = '0;
    ctrl.ld_init   = (state == S_IDLE) && start;
    ctrl.x_we      = run && (cyc == CW'(T - 1));
    ctrl.p1_issue  = run && (cyc < CW'(U));
    ctrl.b_shift   = ctrl.p1_issue;
    ctrl.acc_first = run && (cyc == CW'(2));
    ctrl.acc_p1    = run && (cyc >= CW'(3)) && (cyc <= CW'(U + 1));
    ctrl.b_load_w  = run && (cyc == CW'(C_W));
    ctrl.acc_pre   = run && (cyc == CW'(C_PRE));
    ctrl.p2_issue  = run && (cyc >= CW'(C_PRE)) && (cyc <= CW'(C_PRE + U));
    ctrl.acc_p2    = run && (cyc >= CW'(C_ACC2)) && (cyc <= CW'(C_ACC2 + U));
    ctrl.base      = ctrl.p2_issue ? 8'(cyc - CW'(C_PRE)) : 8'(cyc);
  end

  assign busy      = (state == S_RUN);
  assign iter_done = ctrl.x_we;
  assign done      = (state == S_DONE);

  // phases never overlap
  a_phases: assert property (@(posedge clk) disable iff (!rst_n)
    !(ctrl.p1_issue && ctrl.p2_issue) && !(ctrl.acc_p1 && ctrl.acc_p2));

endmodule
