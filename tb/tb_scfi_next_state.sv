// tb_scfi_next_state: the hardened next-state function at protection levels
// 2, 3 and 4. Fault-free: for every state and random valid inputs the output
// is the code of the reference machine's next state and all error bits are 1.
// Faulted: 1..N-1 bit flips in a control signal the edge depends on must
// give an output that is not the code of any state S0..S3. The count of such
// detected faults is printed per level.
module tb_scfi_next_state;
  import scfi_tb_pkg::*;
  int checks = 0, failures = 0;

  logic [47:0] s_ce;
  logic [95:0] x_e;
  logic [5:0]  s2;
  logic [8:0]  s3;
  logic [11:0] s4;
  logic [9:0]  sel2, sel3, sel4;
  logic [1:0]  e2;
  logic [5:0]  e3;
  logic [7:0]  e4;

  scfi_next_state #(.N(2)) dut2 (.s_ce_i(s_ce[5:0]), .x_e_i(x_e[11:0]), .s_ne_o(s2),
                                 .sel_o(sel2), .e_o(e2));
  scfi_next_state #(.N(3)) dut3 (.s_ce_i(s_ce[8:0]), .x_e_i(x_e[17:0]), .s_ne_o(s3),
                                 .sel_o(sel3), .e_o(e3));
  scfi_next_state #(.N(4)) dut4 (.s_ce_i(s_ce[11:0]), .x_e_i(x_e[23:0]), .s_ne_o(s4),
                                 .sel_o(sel4), .e_o(e4));

  function automatic logic [47:0] out_of(input int n);
    case (n)
      2: return 48'(s2);
      3: return 48'(s3);
      default: return 48'(s4);
    endcase
  endfunction

  function automatic bit errs_ok(input int n);
    case (n)
      2: return &e2;
      3: return &e3;
      default: return &e4;
    endcase
  endfunction

  function automatic bit is_valid_state(input logic [47:0] v, input int n);
    for (int s = 0; s < 4; s++) if (v == scode(s, n)) return 1;
    return 0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ns, ei, b, nflip, detected;
    logic [5:0] x, y, care;
    for (int n = 2; n <= 4; n++) begin
      detected = 0;
      for (int it = 0; it < 1000; it++) begin
        int s;
        s = it % 4;
        x = rand_x();
        ref_step(s, x, ns, y, ei);
        care = care_of(ei);
        s_ce = scode(s, n);
        x_e = enc_x(x, n);
        #1;
        checks++;
        if (out_of(n) !== scode(ns, n) || !errs_ok(n)) begin
          failures++;
          $display("FAIL N=%0d s=%0d x=%b out=%h exp=%h", n, s, x, out_of(n), scode(ns, n));
        end
        // inject 1..N-1 bit flips into one relevant control signal
        do b = $urandom % 6; while (!care[b]);
        nflip = 1 + ($urandom % (n - 1));
        for (int f = 0; f < nflip; f++) x_e[b*n+f] ^= 1'b1;
        #1;
        checks++;
        if (is_valid_state(out_of(n), n)) begin
          failures++;
          $display("FAIL N=%0d undetected fault s=%0d sig=%0d flips=%0d", n, s, b, nflip);
        end else detected++;
      end
      $display("level %0d: %0d of 1000 injected control faults detected", n, detected);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
