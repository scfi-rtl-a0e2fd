// scfi_unmix: unmix layer of the hardened next-state function.
//
// From each 32-bit diffusion output D_i the top SK bits are the i-th share of
// the encoded next state; the shares are concatenated (share 0 most
// significant) and the top S_W bits form S_Ne. The bottom E_W bits of every
// vector are error-detection bits; together they form E (vector 0 most
// significant). The remaining middle bits are unused. Pure wiring.
//
// The published text puts the error bits at the "topmost" bits of each
// vector while its drawing shows them at the end opposite the state share;
// this design follows the drawing.
module scfi_unmix #(
  parameter int unsigned N   = 2,
  parameter int unsigned S_W = scfi_pkg::state_w(N),
  parameter int unsigned X_W = scfi_example_pkg::NUM_CTRL * scfi_pkg::ctrl_w(N),
  parameter int unsigned E_W = scfi_pkg::err_w(N),
  parameter int unsigned K   = scfi_pkg::calc_k(S_W, X_W, E_W),
  parameter int unsigned SK  = scfi_pkg::cdiv(S_W, K)
) (
  input  logic [K-1:0][31:0] d_i,
  output logic [S_W-1:0]     s_ne_o,
  output logic [K*E_W-1:0]   e_o
);

  logic [K*SK-1:0] s_cat;

  for (genvar i = 0; i < K; i++) begin : g_vec
    assign s_cat[(K-1-i)*SK+:SK]   = d_i[i][31-:SK];
    assign e_o[(K-1-i)*E_W+:E_W]   = d_i[i][E_W-1:0];
  end

  assign s_ne_o = s_cat[K*SK-1-:S_W];

endmodule
