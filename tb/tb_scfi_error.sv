// tb_scfi_error: the next state passes only when every error bit is 1;
// any cleared error bit yields the all-zero word. Exhaustive over 4 error
// bits with random state words.
module tb_scfi_error;
  int checks = 0, failures = 0;
  logic [8:0] s_in, s_out;
  logic [3:0] e;

  scfi_error #(.S_W(9), .E_W(4)) dut (.s_ne_i(s_in), .e_i(e), .s_ne_o(s_out));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 50; it++) begin
      for (int v = 0; v < 16; v++) begin
        s_in = 9'($urandom) | 9'h1;
        e = 4'(v);
        #1;
        checks++;
        if (s_out !== ((v == 15) ? s_in : 9'h0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
