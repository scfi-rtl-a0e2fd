// tb_mds_mult: checks the MDS multiplication network against the matrix
// product computed from its coefficients, on unit vectors and random words,
// and checks the branch-number property (one nonzero input byte gives four
// nonzero output bytes).
module tb_mds_mult;
  import scfi_tb_pkg::*;

  logic [31:0] l, d;
  int checks = 0, failures = 0;

  mds_mult dut (.l_i(l), .d_o(d));

  task automatic check(input logic [31:0] v);
    l = v;
    #1;
    checks++;
    if (d !== mds_ref(v)) begin
      failures++;
      $display("FAIL l=%h d=%h exp=%h", v, d, mds_ref(v));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // known products of unit bytes: columns of the matrix
    l = 32'h0100_0000; #1; checks++; if (d != 32'h0301_0404) failures++;
    l = 32'h0001_0000; #1; checks++; if (d != 32'h0103_0604) failures++;
    l = 32'h0000_0100; #1; checks++; if (d != 32'h0202_0301) failures++;
    l = 32'h0000_0001; #1; checks++; if (d != 32'h0302_0103) failures++;
    for (int i = 0; i < 32; i++) check(32'(1) << i);
    for (int i = 0; i < 2000; i++) check($urandom);
    // branch number: single nonzero input byte -> all output bytes nonzero
    for (int b = 0; b < 4; b++) begin
      for (int v = 1; v < 256; v++) begin
        l = 32'(v) << (8 * b);
        #1;
        checks++;
        if (d[31:24] == 0 || d[23:16] == 0 || d[15:8] == 0 || d[7:0] == 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
