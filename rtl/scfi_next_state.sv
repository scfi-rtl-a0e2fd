// scfi_next_state: fault-hardened next-state function phi_FH of the example
// state machine.
//
// Six stages, all combinational:
//   1 scfi_pattern_match - finds the active CFG edge from the encoded current
//                          state S_Ce and the encoded control signals X_e and
//                          forwards the relevant encoded control bits;
//   2 scfi_mod_select    - picks the precomputed modifier of that edge;
//   3 scfi_mix           - packs {S_Ce, X_e_active, Mod} into K 32-bit vectors;
//   4 scfi_diffusion     - multiplies each vector by the MDS matrix;
//   5 scfi_unmix         - extracts the encoded next state S_Ne and the error
//                          bits E;
//   6 scfi_error         - ANDs S_Ne with E.
// With genuine inputs the result is the code of the destination state. A
// corrupted state, a control signal that is not a valid codeword, or a fault
// inside the function changes the MDS output in several bytes, so the result
// is, with high probability, an invalid state code (or zero).
//
// Interface: s_ce_i (encoded state), x_e_i (N-bit codeword per control
// signal, signal i in bits [i*N +: N]); s_ne_o (hardened next state), sel_o
// (one-hot active edge, used by the output logic), e_o (raw error bits).
// The stage order and contents follow the published hardening flow; widths
// come from the protection level N as chosen in scfi_pkg.
module scfi_next_state #(
  parameter int unsigned N = 2
) (
  input  logic [scfi_pkg::state_w(N)-1:0]                           s_ce_i,
  input  logic [scfi_example_pkg::NUM_CTRL*scfi_pkg::ctrl_w(N)-1:0] x_e_i,
  output logic [scfi_pkg::state_w(N)-1:0]                           s_ne_o,
  output logic [scfi_example_pkg::NUM_EDGES-1:0]                    sel_o,
  output logic [scfi_pkg::calc_k(scfi_pkg::state_w(N),
      scfi_example_pkg::NUM_CTRL*scfi_pkg::ctrl_w(N), scfi_pkg::err_w(N))*scfi_pkg::err_w(N)-1:0] e_o
);
  import scfi_pkg::*;

  localparam int unsigned S_W = state_w(N);
  localparam int unsigned X_W = scfi_example_pkg::NUM_CTRL * ctrl_w(N);
  localparam int unsigned E_W = err_w(N);
  localparam int unsigned K   = calc_k(S_W, X_W, E_W);
  localparam int unsigned SK  = cdiv(S_W, K);
  localparam int unsigned XK  = cdiv(X_W, K);
  localparam int unsigned MK  = MDS_W - SK - XK;

  logic [X_W-1:0]      x_act;
  logic [K*MK-1:0]     mod_act;
  logic [K-1:0][31:0]  l_vec, d_vec;
  logic [S_W-1:0]      s_ne_raw;

  scfi_pattern_match #(.N(N)) u_match (
    .s_ce_i (s_ce_i),
    .x_e_i  (x_e_i),
    .sel_o  (sel_o),
    .x_act_o(x_act)
  );

  scfi_mod_select #(.N(N)) u_mod (
    .sel_i(sel_o),
    .mod_o(mod_act)
  );

  scfi_mix #(.N(N)) u_mix (
    .s_ce_i(s_ce_i),
    .x_e_i (x_act),
    .mod_i (mod_act),
    .l_o   (l_vec)
  );

  scfi_diffusion #(.K(K)) u_diff (
    .l_i(l_vec),
    .d_o(d_vec)
  );

  scfi_unmix #(.N(N)) u_unmix (
    .d_i   (d_vec),
    .s_ne_o(s_ne_raw),
    .e_o   (e_o)
  );

  scfi_error #(.S_W(S_W), .E_W(K * E_W)) u_err (
    .s_ne_i(s_ne_raw),
    .e_i   (e_o),
    .s_ne_o(s_ne_o)
  );

endmodule
