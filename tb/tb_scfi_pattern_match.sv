// tb_scfi_pattern_match: for every state and random valid control inputs the
// select must point at the edge the unprotected reference machine takes and
// X_e_active must be the input masked to that edge's signals. Control
// signals that are not codewords, and corrupted state codes, must select no
// edge. Protection level 3 (3-bit codewords).
module tb_scfi_pattern_match;
  import scfi_tb_pkg::*;
  localparam int N = 3;
  int checks = 0, failures = 0;

  logic [3*N-1:0] s_ce;
  logic [6*N-1:0] x_e, x_act, mask;
  logic [9:0]     sel;

  scfi_pattern_match #(.N(N)) dut (.s_ce_i(s_ce), .x_e_i(x_e), .sel_o(sel), .x_act_o(x_act));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ns, ei, b, fb;
    logic [5:0] x, y, care;
    for (int it = 0; it < 2000; it++) begin
      int s;
      s = it % 4;
      x = rand_x();
      ref_step(s, x, ns, y, ei);
      care = care_of(ei);
      s_ce = (3 * N)'(scode(s, N));
      x_e = (6 * N)'(enc_x(x, N));
      #1;
      for (int i = 0; i < 6; i++) mask[i*N+:N] = {N{care[i]}};
      checks++;
      if (sel !== 10'(1) << ei || x_act !== (x_e & mask)) begin
        failures++;
        $display("FAIL s=%0d x=%b sel=%b exp edge %0d", s, x, sel, ei);
      end
      // flip 1..N-1 bits of one signal the edge depends on -> no match
      do b = $urandom % 6; while (!care[b]);
      fb = b * N + int'($urandom % N);
      x_e[fb] = !x_e[fb];
      #1;
      checks++;
      if (sel !== '0 || x_act !== '0) begin
        failures++;
        $display("FAIL corrupted x not rejected s=%0d sel=%b", s, sel);
      end
      // corrupt the state code in one bit -> no match
      x_e = (6 * N)'(enc_x(x, N));
      fb = int'($urandom % (3 * N));
      s_ce[fb] = !s_ce[fb];
      #1;
      checks++;
      if (sel !== '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
