// mds_mult: lightweight 4x4 MDS matrix multiplication on a 32-bit vector.
//
// The 32-bit input L is taken as four bytes (a, b, c, d), a in bits 31:24. The
// network has four XOR layers of two byte-wide XORs each. Between layers the
// four byte lanes rotate by one position (lane a receives lane b, b receives
// c, c receives d, d receives the updated a). Three multiplications by alpha
// sit in layers 2 and 3:
//   layer 1: a ^= b;         c ^= d
//   layer 2: a ^= b;         c ^= alpha*d
//   layer 3: a ^= alpha*b;   d  = alpha*d;  c ^= d
//   layer 4: a ^= b;         c ^= d        (no rotation after this layer)
// alpha is the root of X^8 + X^2 + 1, so alpha*x = (x << 1) ^ (x[7] ? 8'h05 : 0).
// In matrix form (coefficients as polynomials in alpha, 3 = 1+alpha,
// 4 = alpha^2, 6 = alpha^2+alpha), rows are the output bytes a..d:
//   [3 1 2 3; 1 3 2 2; 4 6 3 1; 4 4 1 3]
// Every square sub-matrix is invertible, so the branch number is 5: a change
// in one input byte changes all four output bytes.
//
// The placement of the XORs, the lane rotation and the alpha multipliers
// follow the published circuit drawing of this matrix (eight XORs, three
// alphas, four XOR layers); the byte order on the bus is this design's choice.
// Purely combinational, no clock.
module mds_mult (
  input  logic [31:0] l_i,
  output logic [31:0] d_o
);

  function automatic logic [7:0] alpha(input logic [7:0] x);
    return {x[6:0], 1'b0} ^ (x[7] ? 8'h05 : 8'h00);
  endfunction

  // lane values entering each layer: [layer][lane]
  logic [7:0] a1, b1, c1, d1;  // after layer 1, before rotation
  logic [7:0] a2, b2, c2, d2;
  logic [7:0] a3, b3, c3, d3;
  logic [7:0] a4, c4;

  always_comb begin
    // layer 1
    a1 = l_i[31:24] ^ l_i[23:16];
    b1 = l_i[23:16];
    c1 = l_i[15:8] ^ l_i[7:0];
    d1 = l_i[7:0];
    // rotate, layer 2: inputs (b1, c1, d1, a1)
    a2 = b1 ^ c1;
    b2 = c1;
    c2 = d1 ^ alpha(a1);
    d2 = a1;
    // rotate, layer 3: inputs (b2, c2, d2, a2)
    a3 = b2 ^ alpha(c2);
    b3 = c2;
    d3 = alpha(a2);
    c3 = d2 ^ d3;
    // rotate, layer 4: inputs (b3, c3, d3, a3)
    a4 = b3 ^ c3;
    c4 = d3 ^ a3;
    d_o = {a4, c3, c4, a3};
  end

endmodule
