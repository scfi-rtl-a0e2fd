// scfi_mod_select: modifier table and modifier selection of the hardened
// next-state function (step 2 of the hardening).
//
// For every edge t of the control-flow graph a modifier MOD[t] is computed at
// elaboration time (scfi_pkg::solve_mod) such that the mix, diffusion and
// unmix layers map {code(src), expected control word, MOD[t]} to the code of
// the destination state with every error bit set to 1. Because several edges
// may end in the same state, this is how different paths collide on one state
// code. The modifier of the selected edge is driven out by an AND-OR
// multiplexer over the one-hot selects; with no select high the modifier is 0.
// Elaboration stops with an error if a modifier cannot be found.
//
// Solving for the modifier and muxing it by the edge select follow the
// published method; the GF(2) elimination used to solve is this design's.
// Combinational.
module scfi_mod_select #(
  parameter int unsigned N = 2,
  parameter int unsigned S_W = scfi_pkg::state_w(N),
  parameter int unsigned X_W = scfi_example_pkg::NUM_CTRL * scfi_pkg::ctrl_w(N),
  parameter int unsigned E_W = scfi_pkg::err_w(N),
  parameter int unsigned K   = scfi_pkg::calc_k(S_W, X_W, E_W),
  parameter int unsigned SK  = scfi_pkg::cdiv(S_W, K),
  parameter int unsigned XK  = scfi_pkg::cdiv(X_W, K),
  parameter int unsigned MK  = scfi_pkg::MDS_W - SK - XK
) (
  input  logic [scfi_example_pkg::NUM_EDGES-1:0] sel_i,
  output logic [K*MK-1:0]                        mod_o
);
  import scfi_pkg::*;
  import scfi_example_pkg::*;

  localparam int unsigned CW = ctrl_w(N);

  // expected encoded control word of an edge, signals outside the care set 0
  function automatic logic [X_W-1:0] expect_word(input int t);
    logic [X_W-1:0] w;
    w = '0;
    for (int unsigned i = 0; i < NUM_CTRL; i++) begin
      if (EDGES[t].care[i])
        w[i*CW+:CW] = EDGES[t].expect_v[i] ? CW'(ctrl_cw_true(N)) : CW'(ctrl_cw_false(N));
    end
    return w;
  endfunction

  logic [NUM_EDGES-1:0][K*MK-1:0] mod_tab;

  for (genvar t = 0; t < NUM_EDGES; t++) begin : g_edge
    localparam logic [K*SK-1:0] SRC_PAD =
        (K * SK)'(S_W'(state_code(int'(EDGES[t].src), N))) << (K * SK - S_W);
    localparam logic [K*SK-1:0] DST_PAD =
        (K * SK)'(S_W'(state_code(int'(EDGES[t].dst), N))) << (K * SK - S_W);
    localparam logic [K*XK-1:0] X_PAD = (K * XK)'(expect_word(t)) << (K * XK - X_W);
    for (genvar i = 0; i < K; i++) begin : g_share
      localparam logic [31:0] L0 =
          {SRC_PAD[(K-1-i)*SK+:SK], X_PAD[(K-1-i)*XK+:XK], MK'(0)};
      localparam logic [32:0] SOL = solve_mod(L0, SK, E_W, MK, 32'(DST_PAD[(K-1-i)*SK+:SK]));
      if (!SOL[32]) begin : g_unsolvable
        $error("scfi_mod_select: no modifier for edge %0d share %0d", t, i);
      end
      assign mod_tab[t][(K-1-i)*MK+:MK] = SOL[MK-1:0];
    end
  end

  always_comb begin
    mod_o = '0;
    for (int t = 0; t < NUM_EDGES; t++) mod_o = mod_o | (sel_i[t] ? mod_tab[t] : '0);
  end

endmodule
