// tb_scfi_fsm_levels: the hardened state machine at the protection levels 3
// and 4 (the default, level 2, is covered by tb_scfi_fsm). At level 3 the
// state and control words no longer fit one 32-bit MDS vector, so this also
// runs the two-vector mix/unmix path end to end. Every edge must be taken
// and every injected control fault must end in ERROR.
module tb_scfi_fsm_levels;
  logic clk = 0;
  always #5 clk = ~clk;

  logic done3, done4;
  int c3, f3, e3, d3, c4, f4, e4, d4;
  int checks = 0, failures = 0;

  scfi_fsm_level_check #(.N(3)) u_l3 (.clk_i(clk), .done_o(done3), .checks_o(c3),
      .failures_o(f3), .edges_covered_o(e3), .faults_detected_o(d3));
  scfi_fsm_level_check #(.N(4)) u_l4 (.clk_i(clk), .done_o(done4), .checks_o(c4),
      .failures_o(f4), .edges_covered_o(e4), .faults_detected_o(d4));

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done3 && done4);
    #1;
    $display("level 3: %0d edges covered, %0d control faults detected", e3, d3);
    $display("level 4: %0d edges covered, %0d control faults detected", e4, d4);
    checks = c3 + c4 + 4;
    failures = f3 + f4;
    if (e3 != 10) failures++;
    if (e4 != 10) failures++;
    if (d3 == 0) failures++;
    if (d4 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
