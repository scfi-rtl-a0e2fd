// scfi_fsm: the example four-state Mealy machine hardened with SCFI (top).
//
// States S0..S3 are stored as 3N-bit codewords with pairwise Hamming distance
// of at least N; the control signals x0..x5 arrive already encoded, each as
// an N-bit codeword (TRUE 1010..., FALSE 0101...). In a valid state the next
// state is the output of the hardened next-state function scfi_next_state.
// ERROR is terminal (also checked by an assertion). Any other register
// value, which is what a fault in the state register, the control signals or
// the next-state logic produces, leads to ERROR in the following cycle.
// alert_o is high while the register holds an invalid code or ERROR. y_o[i]
// is the Mealy output y_i of the edge taken on x_i; this output logic is not
// hardened.
//
// Timing: one state transition per clock; the hardened function is purely
// combinational, so a fault is visible as alert_o in the first cycle the
// corrupted state sits in the register. rst_ni is an active-low asynchronous
// reset to S0.
//
// The next-state case statement (valid states through phi_FH, ERROR stays,
// default raises the alert and goes to ERROR) follows the published example.
// Keeping alert_o high in ERROR and the asynchronous reset are this design's
// choices.
module scfi_fsm #(
  parameter int unsigned N = 2  // protection level: faults needed to hijack
) (
  input  logic                                                      clk_i,
  input  logic                                                      rst_ni,
  input  logic [scfi_example_pkg::NUM_CTRL*scfi_pkg::ctrl_w(N)-1:0] x_e_i,
  output logic [scfi_example_pkg::NUM_CTRL-1:0]                     y_o,
  output logic [scfi_pkg::state_w(N)-1:0]                           state_o,
  output logic                                                      alert_o
);
  import scfi_pkg::*;
  import scfi_example_pkg::*;

  localparam int unsigned S_W = state_w(N);
  localparam logic [S_W-1:0] C_S0  = S_W'(state_code(S0, N));
  localparam logic [S_W-1:0] C_S1  = S_W'(state_code(S1, N));
  localparam logic [S_W-1:0] C_S2  = S_W'(state_code(S2, N));
  localparam logic [S_W-1:0] C_S3  = S_W'(state_code(S3, N));
  localparam logic [S_W-1:0] C_ERR = S_W'(state_code(ERROR, N));

  logic [S_W-1:0]       state_q, state_d, phi_fh;
  logic [NUM_EDGES-1:0] sel;

  scfi_next_state #(.N(N)) u_ns (
    .s_ce_i(state_q),
    .x_e_i (x_e_i),
    .s_ne_o(phi_fh),
    .sel_o (sel),
    .e_o   ()
  );

  always_comb begin
    alert_o = 1'b0;
    unique case (state_q)
      C_S0, C_S1, C_S2, C_S3: state_d = phi_fh;
      C_ERR: begin
        alert_o = 1'b1;
        state_d = C_ERR;
      end
      default: begin
        alert_o = 1'b1;
        state_d = C_ERR;
      end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) state_q <= C_S0;
    else         state_q <= state_d;
  end

  // Mealy output logic (not hardened)
  always_comb begin
    y_o = '0;
    for (int t = 0; t < NUM_EDGES; t++) if (sel[t]) y_o = y_o | EDGES[t].out;
  end

  assign state_o = state_q;

  // Edges of one state are mutually exclusive by construction, so at most
  // one edge can match, whatever the inputs (also under faults).
  a_one_edge: assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(sel))
    else $error("scfi_fsm: more than one CFG edge selected");

  // ERROR is terminal: only reset leaves it.
  a_error_terminal: assert property (@(posedge clk_i) disable iff (!rst_ni)
      state_q == C_ERR |=> state_q == C_ERR)
    else $error("scfi_fsm: left the ERROR state");

endmodule
