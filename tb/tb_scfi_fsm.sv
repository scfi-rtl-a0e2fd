// tb_scfi_fsm: end-to-end test of the hardened example state machine at its
// default protection level (N = 2), against the unprotected reference model.
//
//  1. Random walk with valid encoded inputs: state code, Mealy outputs and a
//     low alert are checked every cycle; every CFG edge must be taken, and S3
//     must be entered both from S1 and from S2 (two paths colliding on one
//     state code).
//  2. Faults on the control signals (1..N-1 bit flips in a signal the current
//     state depends on, one cycle): the machine must enter ERROR with alert.
//  3. Faults on a control signal the current state ignores: no effect.
//  4. Faults on the state register input (one bit flipped for one edge): the
//     alert must rise in the next cycle and ERROR must follow.
//  5. Faults inside the next-state function (a bit of a diffusion input
//     flipped for one edge): the machine must never land in a wrong valid
//     state; detections are counted and at least one is required.
//  6. ERROR is terminal under random inputs; reset leaves it.
module tb_scfi_fsm;
  import scfi_tb_pkg::*;
  localparam int N = 2;
  localparam int SW = 3 * N;

  logic clk = 0, rst_n = 0;
  logic [6*N-1:0] x_e;
  logic [5:0] y;
  logic [SW-1:0] state;
  logic alert;

  scfi_fsm dut (.clk_i(clk), .rst_ni(rst_n), .x_e_i(x_e), .y_o(y), .state_o(state),
                .alert_o(alert));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int edge_cnt [10];
  int s3_from_s1 = 0, s3_from_s2 = 0;
  int ctrl_fault_det = 0, dontcare_ignored = 0, reg_fault_det = 0;
  int logic_fault_det = 0, logic_fault_masked = 0, error_hold = 0, reset_exit = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (t=%0t state=%h)", what, $time, state);
    end
  endtask

  function automatic int state_idx(input logic [SW-1:0] v);
    for (int s = 0; s < 5; s++) if (v == SW'(scode(s, N))) return s;
    return -1;
  endfunction

  task automatic do_reset();
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
  endtask

  // drive valid inputs for the state the machine is in, return reference info
  task automatic step_valid(input int s, output int ns, output int ei);
    logic [5:0] x, yr;
    x = rand_x();
    x_e = (6 * N)'(enc_x(x, N));
    ref_step(s, x, ns, yr, ei);
    #1;
    check(y == yr, "Mealy output");
    @(negedge clk);
  endtask

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, ns, ei, b, fb, nflip;
    logic [5:0] care;
    x_e = (6 * N)'(enc_x(6'b0, N));
    #12;
    do_reset();
    check(state == SW'(scode(0, N)) && !alert, "reset to S0");

    // 1. random walk
    s = 0;
    for (int it = 0; it < 3000; it++) begin
      step_valid(s, ns, ei);
      edge_cnt[ei]++;
      if (ns == 3 && s == 1) s3_from_s1++;
      if (ns == 3 && s == 2) s3_from_s2++;
      check(state == SW'(scode(ns, N)), "state follows reference");
      check(!alert, "no alert in fault-free run");
      s = ns;
    end

    // 2./3. control signal faults
    for (int it = 0; it < 200; it++) begin
      logic [5:0] x, yr;
      do_reset();
      s = 0;
      for (int k = 0, n = $urandom % 6; k < n; k++) begin
        step_valid(s, ns, ei);
        s = ns;
      end
      x = rand_x();
      x_e = (6 * N)'(enc_x(x, N));
      ref_step(s, x, ns, yr, ei);
      care = care_of(ei);
      if (it % 2 == 0) begin
        do b = $urandom % 6; while (!care[b]);
        nflip = 1 + ($urandom % (N - 1));
        for (int f = 0; f < nflip; f++) x_e[b*N+f] = !x_e[b*N+f];
        @(negedge clk);
        x_e = (6 * N)'(enc_x(6'b0, N));
        check(state_idx(state) != ns || state_idx(state) == -1, "control fault not accepted");
        @(negedge clk);
        check(state == SW'(scode(4, N)) && alert, "control fault -> ERROR");
        if (state == SW'(scode(4, N)) && alert) ctrl_fault_det++;
      end else begin
        do b = $urandom % 6; while (care[b]);
        fb = b * N + int'($urandom % N);
        x_e[fb] = !x_e[fb];
        @(negedge clk);
        check(state == SW'(scode(ns, N)) && !alert, "ignored signal has no effect");
        if (state == SW'(scode(ns, N)) && !alert) dontcare_ignored++;
      end
    end

    // 4. state register faults (bit flip on the register input for one edge)
    for (int it = 0; it < 100; it++) begin
      logic [SW-1:0] bad;
      do_reset();
      s = 0;
      for (int k = 0, n = $urandom % 6; k < n; k++) begin
        step_valid(s, ns, ei);
        s = ns;
      end
      x_e = (6 * N)'(enc_x(6'b0, N));
      #1;
      bad = dut.state_d;
      fb = int'($urandom % SW);
      bad[fb] = !bad[fb];
      force dut.state_d = bad;
      @(posedge clk);
      #1;
      release dut.state_d;
      check(alert, "alert right after state register fault");
      @(negedge clk);
      @(negedge clk);
      check(state == SW'(scode(4, N)) && alert, "state fault -> ERROR");
      if (state == SW'(scode(4, N)) && alert) reg_fault_det++;
    end

    // 5. faults inside the next-state function (diffusion input bit)
    for (int it = 0; it < 200; it++) begin
      logic [31:0] lv;
      logic [5:0] x, yr;
      do_reset();
      s = 0;
      for (int k = 0, n = $urandom % 6; k < n; k++) begin
        step_valid(s, ns, ei);
        s = ns;
      end
      x = rand_x();
      x_e = (6 * N)'(enc_x(x, N));
      ref_step(s, x, ns, yr, ei);
      #1;
      lv = dut.u_ns.l_vec[0];
      fb = int'($urandom % 32);
      lv[fb] = !lv[fb];
      force dut.u_ns.l_vec[0] = lv;
      @(posedge clk);
      #1;
      release dut.u_ns.l_vec[0];
      check(state == SW'(scode(ns, N)) || state_idx(state) == -1, "no hijack by logic fault");
      if (state_idx(state) == -1) logic_fault_det++;
      else logic_fault_masked++;
      @(negedge clk);
    end

    // 6. ERROR is terminal, reset leaves it
    for (int k = 0; k < 50; k++) begin
      x_e = (6 * N)'(enc_x(rand_x(), N));
      @(negedge clk);
      if (state_idx(state) == -1 || state_idx(state) == 4) begin
        check(alert, "alert while in error");
      end
    end
    check(state == SW'(scode(4, N)), "ERROR is terminal");
    if (state == SW'(scode(4, N))) error_hold++;
    do_reset();
    check(state == SW'(scode(0, N)) && !alert, "reset leaves ERROR");
    if (state == SW'(scode(0, N))) reset_exit++;

    // coverage of the mechanisms
    for (int e = 0; e < 10; e++) begin
      $display("edge %0d taken %0d times", e, edge_cnt[e]);
      check(edge_cnt[e] > 0, "edge covered");
    end
    $display("S3 entered from S1 %0d, from S2 %0d", s3_from_s1, s3_from_s2);
    $display("control faults detected %0d, ignored-signal faults masked %0d", ctrl_fault_det,
             dontcare_ignored);
    $display("state register faults detected %0d", reg_fault_det);
    $display("next-state logic faults detected %0d, without effect %0d", logic_fault_det,
             logic_fault_masked);
    $display("ERROR held %0d, left by reset %0d", error_hold, reset_exit);
    check(s3_from_s1 > 0 && s3_from_s2 > 0, "state collision exercised");
    check(ctrl_fault_det > 0 && dontcare_ignored > 0, "control faults exercised");
    check(reg_fault_det > 0, "state faults exercised");
    check(logic_fault_det > 0, "logic faults exercised");
    check(error_hold > 0 && reset_exit > 0, "error state exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
