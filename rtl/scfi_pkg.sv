// scfi_pkg: constants, encodings and elaboration-time helpers shared by the
// SCFI (state machine control-flow integrity) hardened next-state logic.
//
// Contents
//  * mds_f()        - the 32-bit MDS diffusion function as a constant function.
//                     It is the same circuit as the mds_mult module and is used
//                     only at elaboration time, to compute the modifier table.
//  * solve_mod()    - GF(2) Gaussian elimination that finds the modifier bits of
//                     one 32-bit vector so that the MDS output carries a given
//                     next-state share in its top bits and all-ones error bits
//                     in its bottom bits (requirement R4, "collision capability").
//  * ctrl_cw_*()    - codewords of an encoded 1-bit control signal (R1).
//  * state_code()   - codeword of an encoded state (R2).
//  * shape helpers  - number of MDS vectors k and the per-vector share widths.
//
// Field: multiplication by alpha, the root of X^8 + X^2 + 1, i.e. a left shift
// by one with the dropped bit 7 folded back into bits 2 and 0.
//
// Choices of this design (not fixed by the published description):
//  * control codeword of width N: TRUE = 1010..., FALSE = 0101... (distance N);
//  * state codeword of width 3N: the 3-bit value (index+1) repeated N times, so
//    any two states differ in at least N bits and the all-zero word produced by
//    the error logic is never a valid state;
//  * e = N error bits per MDS vector;
//  * vector layout, most significant bit first: state share, control share,
//    modifier share; the modifier takes all bits left over.
package scfi_pkg;

  localparam int unsigned MDS_W = 32;  // input/output width of one MDS block
  localparam int unsigned STATE_IDX_W = 3;  // bits of the repeated state index

  // ---------------------------------------------------------------------------
  // Finite-field helpers
  // ---------------------------------------------------------------------------
  function automatic logic [7:0] alpha_mul(input logic [7:0] x);
    return {x[6:0], 1'b0} ^ (x[7] ? 8'h05 : 8'h00);
  endfunction

  // Same network as mds_mult (four XOR layers, three alpha multiplications).
  function automatic logic [31:0] mds_f(input logic [31:0] l);
    logic [7:0] a, b, c, d, t;
    {a, b, c, d} = l;
    a = a ^ b;           c = c ^ d;
    t = a; a = b; b = c; c = d; d = t;
    a = a ^ b;           c = c ^ alpha_mul(d);
    t = a; a = b; b = c; c = d; d = t;
    a = a ^ alpha_mul(b); d = alpha_mul(d); c = c ^ d;
    t = a; a = b; b = c; c = d; d = t;
    a = a ^ b;           c = c ^ d;
    return {a, b, c, d};
  endfunction

  // ---------------------------------------------------------------------------
  // Encodings
  // ---------------------------------------------------------------------------
  function automatic logic [31:0] ctrl_cw_true(input int unsigned n);
    logic [31:0] w;
    w = '0;
    for (int unsigned i = 0; i < n; i++) w[i] = ((n - 1 - i) % 2) == 0;
    return w;
  endfunction

  function automatic logic [31:0] ctrl_cw_false(input int unsigned n);
    logic [31:0] w;
    w = '0;
    for (int unsigned i = 0; i < n; i++) w[i] = ((n - 1 - i) % 2) == 1;
    return w;
  endfunction

  function automatic logic [63:0] state_code(input int unsigned idx, input int unsigned n);
    logic [63:0] w;
    logic [STATE_IDX_W-1:0] v;
    v = STATE_IDX_W'(idx + 1);
    w = '0;
    for (int unsigned i = 0; i < n; i++) w[i*STATE_IDX_W+:STATE_IDX_W] = v;
    return w;
  endfunction

  // ---------------------------------------------------------------------------
  // Shape of the mix / unmix layers
  // ---------------------------------------------------------------------------
  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Widths as functions of the protection level n (minimum Hamming distance).
  function automatic int unsigned ctrl_w(input int unsigned n);   // one control signal
    return n;
  endfunction
  function automatic int unsigned state_w(input int unsigned n);  // encoded state
    return STATE_IDX_W * n;
  endfunction
  function automatic int unsigned err_w(input int unsigned n);    // error bits per vector
    return n;
  endfunction

  // Smallest k such that each 32-bit vector holds its state share, its control
  // share, and a modifier share at least as wide as the bits it must force.
  function automatic int unsigned calc_k(input int unsigned s_w, input int unsigned x_w,
                                         input int unsigned e_w);
    for (int unsigned k = 1; k < 64; k++) begin
      if (cdiv(s_w, k) + cdiv(x_w, k) + cdiv(s_w, k) + e_w <= MDS_W) return k;
    end
    return 64;
  endfunction

  // ---------------------------------------------------------------------------
  // Modifier solver (elaboration time only)
  //   l0    : vector with state and control shares in place, modifier bits 0
  //   sk    : width of the state share (top sk bits of the output)
  //   ek    : number of error bits (bottom ek bits of the output, forced to 1)
  //   mk    : width of the modifier share (bottom mk bits of the input)
  //   s_tgt : wanted next-state share, right-aligned
  // Returns {ok, modifier}; ok = 0 if the linear system has no solution.
  // ---------------------------------------------------------------------------
  function automatic logic [32:0] solve_mod(input logic [31:0] l0, input int unsigned sk,
                                            input int unsigned ek, input int unsigned mk,
                                            input logic [31:0] s_tgt);
    logic [31:0] y0, tval, tmask, m;
    logic [31:0] coef[32];
    logic [31:0] rhs;
    int unsigned pivcol[32];
    int unsigned nrows, r;
    logic found, ok;
    logic [31:0] tmp, row;
    logic tb;

    y0 = mds_f(l0);
    tmask = '0;
    tval = '0;
    for (int unsigned i = 0; i < sk; i++) begin
      tmask[31-i] = 1'b1;
      tval[31-i]  = s_tgt[sk-1-i];
    end
    for (int unsigned i = 0; i < ek; i++) begin
      tmask[i] = 1'b1;
      tval[i]  = 1'b1;
    end
    // one equation per forced output bit: sum_j coef[j] * m[j] = y0 ^ tval
    nrows = 0;
    rhs = '0;
    for (int unsigned ob = 0; ob < 32; ob++) begin
      coef[ob] = '0;
      pivcol[ob] = 0;
    end
    for (int unsigned ob = 0; ob < 32; ob++) begin
      if (tmask[ob]) begin
        row = '0;
        for (int unsigned j = 0; j < mk; j++) begin
          tmp = mds_f(32'(1) << j);
          row[j] = tmp[ob];
        end
        coef[nrows] = row;
        rhs[nrows] = y0[ob] ^ tval[ob];
        nrows++;
      end
    end
    // Gauss-Jordan elimination over GF(2)
    r = 0;
    for (int unsigned j = 0; j < mk; j++) begin
      found = 1'b0;
      for (int unsigned p = r; p < nrows; p++) begin
        row = coef[p];
        if (!found && row[j]) begin
          found = 1'b1;
          tmp = coef[p]; coef[p] = coef[r]; coef[r] = tmp;
          tb = rhs[p]; rhs[p] = rhs[r]; rhs[r] = tb;
        end
      end
      if (found) begin
        for (int unsigned i = 0; i < nrows; i++) begin
          row = coef[i];
          if (i != r && row[j]) begin
            coef[i] = coef[i] ^ coef[r];
            rhs[i]  = rhs[i] ^ rhs[r];
          end
        end
        pivcol[r] = j;
        r++;
      end
    end
    ok = 1'b1;
    for (int unsigned i = r; i < nrows; i++) if (rhs[i]) ok = 1'b0;
    m = '0;
    for (int unsigned i = 0; i < r; i++) m[pivcol[i]] = rhs[i];
    return {ok, m};
  endfunction

endpackage
