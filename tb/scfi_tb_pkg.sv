// scfi_tb_pkg: reference models shared by the SCFI testbenches. Everything
// here is written independently of the RTL: the MDS product is computed from
// the matrix coefficients (not from the XOR network), and the example state
// machine is modelled unprotected, as plain if/else-if code over 1-bit
// control signals.
package scfi_tb_pkg;

  // multiplication by alpha (root of X^8 + X^2 + 1)
  function automatic logic [7:0] xt(input logic [7:0] x);
    return {x[6:0], 1'b0} ^ (x[7] ? 8'h05 : 8'h00);
  endfunction

  // multiply x by the polynomial c(alpha)
  function automatic logic [7:0] gmul(input logic [7:0] c, input logic [7:0] x);
    logic [7:0] acc, p;
    acc = '0;
    p = x;
    for (int i = 0; i < 8; i++) begin
      if (c[i]) acc ^= p;
      p = xt(p);
    end
    return acc;
  endfunction

  // rows = output bytes a..d, columns = input bytes a..d
  localparam logic [7:0] MROW [4][4] = '{
    '{8'd3, 8'd1, 8'd2, 8'd3},
    '{8'd1, 8'd3, 8'd2, 8'd2},
    '{8'd4, 8'd6, 8'd3, 8'd1},
    '{8'd4, 8'd4, 8'd1, 8'd3}
  };

  function automatic logic [31:0] mds_ref(input logic [31:0] l);
    logic [7:0] in_b [4];
    logic [7:0] o;
    logic [31:0] r;
    for (int j = 0; j < 4; j++) in_b[j] = l[31-8*j-:8];
    r = '0;
    for (int i = 0; i < 4; i++) begin
      o = '0;
      for (int j = 0; j < 4; j++) o ^= gmul(MROW[i][j], in_b[j]);
      r[31-8*i-:8] = o;
    end
    return r;
  endfunction

  // codewords: TRUE = 1010..., FALSE = 0101... (n bits)
  function automatic logic [15:0] cw(input bit v, input int n);
    logic [15:0] w;
    w = '0;
    for (int i = 0; i < n; i++) w[n-1-i] = (i % 2 == 0) ? v : !v;
    return w;
  endfunction

  // state code: 3-bit (idx+1) repeated n times
  function automatic logic [47:0] scode(input int idx, input int n);
    logic [47:0] w;
    w = '0;
    for (int i = 0; i < n; i++) w[3*i+:3] = 3'(idx + 1);
    return w;
  endfunction

  // encode six 1-bit control signals
  function automatic logic [95:0] enc_x(input logic [5:0] x, input int n);
    logic [95:0] w;
    w = '0;
    for (int i = 0; i < 6; i++) w[i*n+:16] = cw(x[i], n);
    return w;
  endfunction

  // unprotected reference machine: next state index and Mealy outputs
  function automatic void ref_step(input int s, input logic [5:0] x, output int ns,
                                   output logic [5:0] y, output int edge_idx);
    ns = s; y = '0; edge_idx = -1;
    case (s)
      0: if (x[0]) begin ns = 1; y[0] = 1; edge_idx = 0; end
         else if (x[1]) begin ns = 2; y[1] = 1; edge_idx = 1; end
         else edge_idx = 2;
      1: if (x[2]) begin ns = 3; y[2] = 1; edge_idx = 3; end
         else edge_idx = 4;
      2: if (x[3]) begin ns = 3; y[3] = 1; edge_idx = 5; end
         else edge_idx = 6;
      3: if (x[4]) begin ns = 0; y[4] = 1; edge_idx = 7; end
         else if (x[5]) begin ns = 3; y[5] = 1; edge_idx = 8; end
         else edge_idx = 9;
      default: ;
    endcase
  endfunction

  // care mask (per 1-bit signal) of the edge taken from state s
  function automatic logic [5:0] care_of(input int edge_idx);
    case (edge_idx)
      0: return 6'b000001;
      1, 2: return 6'b000011;
      3, 4: return 6'b000100;
      5, 6: return 6'b001000;
      7: return 6'b010000;
      8, 9: return 6'b110000;
      default: return 6'b000000;
    endcase
  endfunction

  // random control vector biased so that every edge gets exercised
  function automatic logic [5:0] rand_x();
    logic [5:0] x;
    x = '0;
    for (int i = 0; i < 6; i++) x[i] = ($urandom % 3) == 0;
    return x;
  endfunction

endpackage
