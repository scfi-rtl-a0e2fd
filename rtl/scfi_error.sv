// scfi_error: error (infection) logic of the hardened next-state function.
//
// Every bit of the encoded next state S_Ne is ANDed with the AND of all
// error-detection bits E. In fault-free operation the modifiers make all
// error bits 1 and S_Ne passes unchanged; if any error bit is 0 the output is
// the all-zero word, which is not a valid state code, so the FSM falls into
// its terminal error state. The published design specifies an AND of S_Ne and
// E; reducing E to one bit first is this design's choice. Combinational.
module scfi_error #(
  parameter int unsigned S_W = 6,
  parameter int unsigned E_W = 2
) (
  input  logic [S_W-1:0] s_ne_i,
  input  logic [E_W-1:0] e_i,
  output logic [S_W-1:0] s_ne_o
);

  assign s_ne_o = s_ne_i & {S_W{&e_i}};

endmodule
