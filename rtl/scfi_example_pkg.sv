// scfi_example_pkg: control-flow graph of the example state machine that the
// hardened FSM (scfi_fsm) implements.
//
// The graph has four states S0..S3 and six control signals x0..x5; each
// labelled edge x_i/y_i fires output y_i:
//   S0 --x0--> S1,  S0 --x1--> S2,  S1 --x2--> S3,  S2 --x3--> S3,
//   S3 --x4--> S0,  S3 --x5--> S3,  reset enters S0.
// Conditions of one state are tested in order (if x0 ... else if x1 ...), and
// a state whose conditions are all false keeps its state. Every edge,
// including these implicit hold edges, is one row of the tables below. For
// each row, CARE marks the control signals whose value the edge depends on and
// EXPECT gives their value (1 = asserted). ERROR is the terminal error state
// added by the hardening.
//
// The graph and the if/else-if order of S0 and S1 follow the published
// example; the order inside S3 (x4 before x5) and the hold edges of S2 and S3
// are this design's choice.
package scfi_example_pkg;

  localparam int unsigned NUM_STATES = 5;  // S0..S3 and ERROR
  localparam int unsigned NUM_CTRL = 6;
  localparam int unsigned NUM_EDGES = 10;

  typedef enum logic [2:0] {
    S0    = 3'd0,
    S1    = 3'd1,
    S2    = 3'd2,
    S3    = 3'd3,
    ERROR = 3'd4
  } state_e;

  typedef struct packed {
    state_e                src;
    state_e                dst;
    logic [NUM_CTRL-1:0]   care;
    logic [NUM_CTRL-1:0]   expect_v;
    logic [NUM_CTRL-1:0]   out;  // Mealy outputs y of this edge (one-hot or 0)
  } edge_t;

  localparam edge_t EDGES [NUM_EDGES] = '{
    // src dst   care        expect      out
    '{S0, S1, 6'b000001, 6'b000001, 6'b000001},  // x0
    '{S0, S2, 6'b000011, 6'b000010, 6'b000010},  // !x0 & x1
    '{S0, S0, 6'b000011, 6'b000000, 6'b000000},  // hold
    '{S1, S3, 6'b000100, 6'b000100, 6'b000100},  // x2
    '{S1, S1, 6'b000100, 6'b000000, 6'b000000},  // hold
    '{S2, S3, 6'b001000, 6'b001000, 6'b001000},  // x3
    '{S2, S2, 6'b001000, 6'b000000, 6'b000000},  // hold
    '{S3, S0, 6'b010000, 6'b010000, 6'b010000},  // x4
    '{S3, S3, 6'b110000, 6'b100000, 6'b100000},  // !x4 & x5
    '{S3, S3, 6'b110000, 6'b000000, 6'b000000}   // hold
  };

endpackage
