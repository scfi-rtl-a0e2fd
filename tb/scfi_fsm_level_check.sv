// scfi_fsm_level_check: drives one hardened state machine of protection level
// N with a random walk of valid encoded inputs (checked against the reference
// model every cycle) followed by control-signal faults of 1..N-1 bit flips,
// each of which must lead to ERROR with the alert raised. Reports its counts
// through its ports when done_o rises.
module scfi_fsm_level_check #(
  parameter int N = 3,
  parameter int STEPS = 2000,
  parameter int FAULTS = 200
) (
  input  logic clk_i,
  output logic done_o,
  output int   checks_o,
  output int   failures_o,
  output int   edges_covered_o,
  output int   faults_detected_o
);
  import scfi_tb_pkg::*;
  localparam int SW = 3 * N;

  logic rst_n;
  logic [6*N-1:0] x_e;
  logic [5:0] y;
  logic [SW-1:0] state;
  logic alert;

  scfi_fsm #(.N(N)) dut (.clk_i(clk_i), .rst_ni(rst_n), .x_e_i(x_e), .y_o(y), .state_o(state),
                         .alert_o(alert));

  task automatic check(input bit ok, input string what);
    checks_o++;
    if (!ok) begin
      failures_o++;
      $display("FAIL N=%0d %s (t=%0t)", N, what, $time);
    end
  endtask

  initial begin
    int s, ns, ei, b, nflip;
    int edge_cnt [10];
    logic [5:0] x, yr, care;
    done_o = 0; checks_o = 0; failures_o = 0; edges_covered_o = 0; faults_detected_o = 0;
    for (int e = 0; e < 10; e++) edge_cnt[e] = 0;
    rst_n = 0;
    x_e = '0;
    @(negedge clk_i);
    rst_n = 1;
    s = 0;
    for (int it = 0; it < STEPS; it++) begin
      x = rand_x();
      x_e = (6 * N)'(enc_x(x, N));
      ref_step(s, x, ns, yr, ei);
      #1;
      check(y == yr, "Mealy output");
      @(negedge clk_i);
      check(state == SW'(scode(ns, N)) && !alert, "state follows reference");
      edge_cnt[ei]++;
      s = ns;
    end
    for (int e = 0; e < 10; e++) if (edge_cnt[e] > 0) edges_covered_o++;
    for (int it = 0; it < FAULTS; it++) begin
      rst_n = 0;
      @(negedge clk_i);
      rst_n = 1;
      s = 0;
      for (int k = 0, n = $urandom % 6; k < n; k++) begin
        x = rand_x();
        x_e = (6 * N)'(enc_x(x, N));
        ref_step(s, x, ns, yr, ei);
        @(negedge clk_i);
        s = ns;
      end
      x = rand_x();
      x_e = (6 * N)'(enc_x(x, N));
      ref_step(s, x, ns, yr, ei);
      care = care_of(ei);
      do b = $urandom % 6; while (!care[b]);
      nflip = 1 + ($urandom % (N - 1));
      for (int f = 0; f < nflip; f++) x_e[b*N+f] = !x_e[b*N+f];
      @(negedge clk_i);
      x_e = (6 * N)'(enc_x(6'b0, N));
      @(negedge clk_i);
      check(state == SW'(scode(4, N)) && alert, "control fault -> ERROR");
      if (state == SW'(scode(4, N)) && alert) faults_detected_o++;
    end
    done_o = 1;
  end
endmodule
