// scfi_pattern_match: input pattern matching of the hardened next-state
// function (step 1 of the hardening).
//
// For every edge t of the control-flow graph (scfi_example_pkg::EDGES) the
// block compares the encoded current state with the code of the edge's source
// state, and every control signal the edge depends on with the codeword of
// its expected value (TRUE or FALSE). A full match raises the 1-bit select
// sel_o[t]. In fault-free operation with valid codewords exactly one select
// is high. The active encoded control word X_e_active is the raw encoded
// input masked to the signals the selected edge depends on (all other signals
// read as 0), so any corruption of those bits still reaches the diffusion
// layer. If nothing matches (a corrupted state or a control signal that is
// not a codeword), no select is high and X_e_active is 0.
//
// The selects are plain 1-bit signals, as in the published prototype, which
// names this as a known weakness. Masking with the care set and exact
// codeword comparison are this design's choices. Combinational.
module scfi_pattern_match #(
  parameter int unsigned N = 2
) (
  input  logic [scfi_pkg::state_w(N)-1:0]                           s_ce_i,
  input  logic [scfi_example_pkg::NUM_CTRL*scfi_pkg::ctrl_w(N)-1:0] x_e_i,
  output logic [scfi_example_pkg::NUM_EDGES-1:0]                    sel_o,
  output logic [scfi_example_pkg::NUM_CTRL*scfi_pkg::ctrl_w(N)-1:0] x_act_o
);
  import scfi_pkg::*;
  import scfi_example_pkg::*;

  localparam int unsigned S_W  = state_w(N);
  localparam int unsigned CW   = ctrl_w(N);
  localparam int unsigned X_W  = NUM_CTRL * CW;
  localparam logic [CW-1:0] CW_T = CW'(ctrl_cw_true(N));
  localparam logic [CW-1:0] CW_F = CW'(ctrl_cw_false(N));

  logic [NUM_EDGES-1:0][X_W-1:0] masked;

  for (genvar t = 0; t < NUM_EDGES; t++) begin : g_edge
    localparam logic [S_W-1:0] SRC = S_W'(state_code(int'(EDGES[t].src), N));
    logic [NUM_CTRL-1:0] sig_ok;
    logic [X_W-1:0]      care_mask;
    for (genvar i = 0; i < NUM_CTRL; i++) begin : g_sig
      localparam logic [CW-1:0] EXP = EDGES[t].expect_v[i] ? CW_T : CW_F;
      assign sig_ok[i] = !EDGES[t].care[i] || (x_e_i[i*CW+:CW] == EXP);
      assign care_mask[i*CW+:CW] = {CW{EDGES[t].care[i]}};
    end
    assign sel_o[t]  = (s_ce_i == SRC) && (&sig_ok);
    assign masked[t] = sel_o[t] ? (x_e_i & care_mask) : '0;
  end

  always_comb begin
    x_act_o = '0;
    for (int t = 0; t < NUM_EDGES; t++) x_act_o = x_act_o | masked[t];
  end

endmodule
