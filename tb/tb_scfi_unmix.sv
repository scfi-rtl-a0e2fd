// tb_scfi_unmix: checks which output bits become the next state and which the
// error bits, for one vector (level 2) and two vectors with padding (level 3).
module tb_scfi_unmix;
  int checks = 0, failures = 0;

  logic [0:0][31:0] d2;
  logic [5:0] s2;
  logic [1:0] e2;
  scfi_unmix #(.N(2)) dut2 (.d_i(d2), .s_ne_o(s2), .e_o(e2));

  logic [1:0][31:0] d3;
  logic [8:0] s3;
  logic [5:0] e3;
  scfi_unmix #(.N(3)) dut3 (.d_i(d3), .s_ne_o(s3), .e_o(e3));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      d2[0] = $urandom; d3[0] = $urandom; d3[1] = $urandom;
      #1;
      checks++;
      if (s2 !== d2[0][31:26] || e2 !== d2[0][1:0]) failures++;
      checks++;
      if (s3 !== {d3[0][31:27], d3[1][31:28]} || e3 !== {d3[0][2:0], d3[1][2:0]}) begin
        failures++;
        $display("FAIL N=3 s=%h e=%h", s3, e3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
