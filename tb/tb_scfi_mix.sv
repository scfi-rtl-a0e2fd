// tb_scfi_mix: checks the bit placement of the mix layer for one vector
// (protection level 2) and for two vectors with padding (level 3), against
// a bit-by-bit model of the layout.
module tb_scfi_mix;
  int checks = 0, failures = 0;

  // N = 2: S 6, X 12, K 1 -> SK 6, XK 12, MK 14
  logic [5:0]  s2;
  logic [11:0] x2;
  logic [13:0] m2;
  logic [0:0][31:0] l2;
  scfi_mix #(.N(2)) dut2 (.s_ce_i(s2), .x_e_i(x2), .mod_i(m2), .l_o(l2));

  // N = 3: S 9, X 18, K 2 -> SK 5, XK 9, MK 18
  logic [8:0]  s3;
  logic [17:0] x3;
  logic [35:0] m3;
  logic [1:0][31:0] l3;
  scfi_mix #(.N(3)) dut3 (.s_ce_i(s3), .x_e_i(x3), .mod_i(m3), .l_o(l3));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e0, e1;
    for (int it = 0; it < 500; it++) begin
      s2 = 6'($urandom); x2 = 12'($urandom); m2 = 14'($urandom);
      s3 = 9'($urandom); x3 = 18'($urandom); m3 = {4'($urandom), $urandom};
      #1;
      checks++;
      if (l2[0] !== {s2, x2, m2}) failures++;
      // state 9 bits padded to 10: share0 = s3[8:4], share1 = {s3[3:0], 0}
      e0 = {s3[8:4], x3[17:9], m3[35:18]};
      e1 = {s3[3:0], 1'b0, x3[8:0], m3[17:0]};
      checks++;
      if (l3[0] !== e0 || l3[1] !== e1) begin
        failures++;
        $display("FAIL N=3 got %h %h exp %h %h", l3[0], l3[1], e0, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
