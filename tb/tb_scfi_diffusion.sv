// tb_scfi_diffusion: two parallel MDS products checked against the matrix
// reference, to see that each vector is transformed on its own.
module tb_scfi_diffusion;
  import scfi_tb_pkg::*;
  int checks = 0, failures = 0;
  logic [1:0][31:0] l, d;

  scfi_diffusion #(.K(2)) dut (.l_i(l), .d_o(d));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 1000; it++) begin
      l[0] = $urandom;
      l[1] = (it < 32) ? 32'(1) << it : $urandom;
      #1;
      checks++;
      if (d[0] !== mds_ref(l[0]) || d[1] !== mds_ref(l[1])) begin
        failures++;
        $display("FAIL %h %h -> %h %h", l[0], l[1], d[0], d[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
