// tb_scfi_mod_select: for every edge, the selected modifier must make the
// MDS product of {source state, expected control word, modifier} carry the
// destination state in its top bits and ones in its error bits (checked with
// the matrix reference). Protection level 2 (one vector) and 4 (two vectors).
// With no select high the modifier must be 0.
module tb_scfi_mod_select;
  import scfi_tb_pkg::*;
  int checks = 0, failures = 0;

  localparam int SRC [10] = '{0, 0, 0, 1, 1, 2, 2, 3, 3, 3};
  localparam int DST [10] = '{1, 2, 0, 3, 1, 3, 2, 0, 3, 3};
  localparam logic [5:0] XV [10] = '{6'b000001, 6'b000010, 6'b000000, 6'b000100, 6'b000000,
                                    6'b001000, 6'b000000, 6'b010000, 6'b100000, 6'b000000};

  logic [9:0]  sel;
  logic [13:0] mod2;
  logic [27:0] mod4;

  scfi_mod_select #(.N(2)) dut2 (.sel_i(sel), .mod_o(mod2));
  scfi_mod_select #(.N(4)) dut4 (.sel_i(sel), .mod_o(mod4));

  function automatic logic [23:0] xword(input int t, input int n);
    logic [95:0] w;
    logic [5:0] care;
    care = care_of(t);
    w = enc_x(XV[t], n);
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < n; j++) if (!care[i]) w[i*n+j] = 1'b0;
    return 24'(w);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d0, d1;
    logic [11:0] s4, t4;
    logic [23:0] x4;
    for (int t = 0; t < 10; t++) begin
      sel = 10'(1) << t;
      #1;
      // level 2: one vector {state 6, control 12, modifier 14}, 2 error bits
      d0 = mds_ref({6'(scode(SRC[t], 2)), 12'(xword(t, 2)), mod2});
      checks++;
      if (d0[31:26] !== 6'(scode(DST[t], 2)) || d0[1:0] !== 2'b11) begin
        failures++;
        $display("FAIL N=2 edge %0d: %h", t, d0);
      end
      // level 4: two vectors {state 6, control 12, modifier 14}, 4 error bits each
      s4 = 12'(scode(SRC[t], 4));
      t4 = 12'(scode(DST[t], 4));
      x4 = xword(t, 4);
      d0 = mds_ref({s4[11:6], x4[23:12], mod4[27:14]});
      d1 = mds_ref({s4[5:0], x4[11:0], mod4[13:0]});
      checks++;
      if ({d0[31:26], d1[31:26]} !== t4 || d0[3:0] !== 4'hf || d1[3:0] !== 4'hf) begin
        failures++;
        $display("FAIL N=4 edge %0d: %h %h", t, d0, d1);
      end
    end
    sel = '0;
    #1;
    checks++;
    if (mod2 !== '0 || mod4 !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
