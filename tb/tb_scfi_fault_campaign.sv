// tb_scfi_fault_campaign: exhaustive single-bit-flip campaign on the MDS
// network inside the hardened next-state function (protection level 2).
//
// For each of the ten CFG edges, driven with inputs that take that edge, every
// bit of every XOR output in the four layers (8 XORs x 8 bits) and of the
// alpha-multiplied lane of layer 3 is flipped, one at a time. The resulting
// next state is classified as unchanged (fault masked), invalid (detected:
// the machine would enter ERROR) or a different valid state (hijack).
// Checks: the fault-free output is right for every edge, and no flip in the
// last XOR layer hijacks, since it changes a single output byte and valid
// state codes are N bits apart. The hijack rate of the whole campaign is
// printed.
module tb_scfi_fault_campaign;
  import scfi_tb_pkg::*;
  localparam int N = 2;

  // one input vector per edge that takes it
  localparam int SRC [10] = '{0, 0, 0, 1, 1, 2, 2, 3, 3, 3};
  localparam int DST [10] = '{1, 2, 0, 3, 1, 3, 2, 0, 3, 3};
  localparam logic [5:0] XV [10] = '{6'b000001, 6'b000010, 6'b000000, 6'b000100, 6'b000000,
                                    6'b001000, 6'b000000, 6'b010000, 6'b100000, 6'b000000};

  logic [5:0]  s_ce, s_ne;
  logic [11:0] x_e;
  logic [9:0]  sel;
  logic [1:0]  e;

  scfi_next_state #(.N(N)) dut (.s_ce_i(s_ce), .x_e_i(x_e), .s_ne_o(s_ne), .sel_o(sel), .e_o(e));

  int checks = 0, failures = 0;
  int masked = 0, detected = 0, hijacked = 0, last_layer_hijack = 0;

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int classify(input int dst);
    if (s_ne == 6'(scode(dst, N))) return 0;
    for (int s = 0; s < 5; s++) if (s_ne == 6'(scode(s, N))) return 2;
    return 1;
  endfunction

  // flip bit b of internal wire w of the MDS network for one evaluation
  task automatic inject(input int w, input int b, input int dst, input bit last_layer);
    logic [7:0] v;
    int c;
    case (w)
      0: begin v = dut.u_diff.g_mds[0].u_mds.a1; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.a1 = v; end
      1: begin v = dut.u_diff.g_mds[0].u_mds.c1; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.c1 = v; end
      2: begin v = dut.u_diff.g_mds[0].u_mds.a2; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.a2 = v; end
      3: begin v = dut.u_diff.g_mds[0].u_mds.c2; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.c2 = v; end
      4: begin v = dut.u_diff.g_mds[0].u_mds.a3; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.a3 = v; end
      5: begin v = dut.u_diff.g_mds[0].u_mds.c3; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.c3 = v; end
      6: begin v = dut.u_diff.g_mds[0].u_mds.d3; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.d3 = v; end
      7: begin v = dut.u_diff.g_mds[0].u_mds.a4; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.a4 = v; end
      default: begin v = dut.u_diff.g_mds[0].u_mds.c4; v[b] = !v[b]; force dut.u_diff.g_mds[0].u_mds.c4 = v; end
    endcase
    #1;
    c = classify(dst);
    case (c)
      0: masked++;
      1: detected++;
      default: begin
        hijacked++;
        if (last_layer) last_layer_hijack++;
      end
    endcase
    case (w)
      0: release dut.u_diff.g_mds[0].u_mds.a1;
      1: release dut.u_diff.g_mds[0].u_mds.c1;
      2: release dut.u_diff.g_mds[0].u_mds.a2;
      3: release dut.u_diff.g_mds[0].u_mds.c2;
      4: release dut.u_diff.g_mds[0].u_mds.a3;
      5: release dut.u_diff.g_mds[0].u_mds.c3;
      6: release dut.u_diff.g_mds[0].u_mds.d3;
      7: release dut.u_diff.g_mds[0].u_mds.a4;
      default: release dut.u_diff.g_mds[0].u_mds.c4;
    endcase
    #1;
  endtask

  initial begin
    int total;
    for (int t = 0; t < 10; t++) begin
      s_ce = 6'(scode(SRC[t], N));
      x_e = 12'(enc_x(XV[t], N));
      #1;
      checks++;
      if (s_ne !== 6'(scode(DST[t], N)) || sel !== 10'(1) << t) begin
        failures++;
        $display("FAIL fault-free edge %0d: %h", t, s_ne);
      end
      for (int w = 0; w < 9; w++)
        for (int b = 0; b < 8; b++) inject(w, b, DST[t], w >= 7);
      // the fault must be gone after release
      checks++;
      if (s_ne !== 6'(scode(DST[t], N))) failures++;
    end
    total = masked + detected + hijacked;
    $display("single-bit flips: %0d, masked %0d, detected %0d, hijacked %0d (%0d.%02d %%)",
             total, masked, detected, hijacked, hijacked * 100 / total,
             (hijacked * 10000 / total) % 100);
    checks++;
    if (last_layer_hijack != 0) begin
      failures++;
      $display("FAIL %0d hijacks from last-layer flips", last_layer_hijack);
    end
    checks++;
    if (detected == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
