// scfi_mix: mix layer of the hardened next-state function.
//
// The encoded current state S_Ce, the active encoded control word X_e and the
// modifier Mod are each cut into K shares, and share i of all three is packed
// into the 32-bit vector L_i, most significant bit first:
//   L_i = { S_Ce share i (SK bits), X_e share i (XK bits), Mod share i (MK bits) }
// Share 0 is the most significant part of each word. A word that does not
// divide evenly is padded with zeros at its least significant end. The layer
// is pure wiring. The split into k shares placed in k vectors follows the
// published structure; the bit order inside a vector and the padding are
// this design's choice.
module scfi_mix #(
  parameter int unsigned N  = 2,
  parameter int unsigned S_W = scfi_pkg::state_w(N),
  parameter int unsigned X_W = scfi_example_pkg::NUM_CTRL * scfi_pkg::ctrl_w(N),
  parameter int unsigned K  = scfi_pkg::calc_k(S_W, X_W, scfi_pkg::err_w(N)),
  parameter int unsigned SK = scfi_pkg::cdiv(S_W, K),
  parameter int unsigned XK = scfi_pkg::cdiv(X_W, K),
  parameter int unsigned MK = scfi_pkg::MDS_W - SK - XK
) (
  input  logic [S_W-1:0]         s_ce_i,
  input  logic [X_W-1:0]         x_e_i,
  input  logic [K*MK-1:0]        mod_i,
  output logic [K-1:0][31:0]     l_o
);

  logic [K*SK-1:0] s_pad;
  logic [K*XK-1:0] x_pad;

  assign s_pad = (K * SK)'(s_ce_i) << (K * SK - S_W);
  assign x_pad = (K * XK)'(x_e_i) << (K * XK - X_W);

  for (genvar i = 0; i < K; i++) begin : g_vec
    assign l_o[i] = {s_pad[(K-1-i)*SK+:SK], x_pad[(K-1-i)*XK+:XK], mod_i[(K-1-i)*MK+:MK]};
  end

endmodule
