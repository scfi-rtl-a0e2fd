# SCFI: a state machine that cannot be steered by a few faults

A finite-state machine (FSM) usually computes its next state with a small
block of comparators and multiplexers. An attacker who can flip one bit in
the state register, in a control signal, or in that logic can send the
machine to any state, whether or not the control-flow graph (CFG) allows
that transition. SCFI (State machine Control-Flow Integrity, after the
scheme by Nasahl et al.) replaces that next-state block with a function
built around a cryptographic diffusion layer. The function reads the
encoded current state (the machine's compressed history) and the encoded
control signals, and gives a valid next-state code only when all of its
inputs are genuine and it is itself undisturbed. Any fewer than N bit flips
in the state, the control signals or the function produce a word that is
not a valid state, with high probability. The machine then falls into a
terminal ERROR state and raises an alert, in the same cycle the bad state
appears.

This repository holds synthesizable SystemVerilog for that hardened
next-state function and for a small example machine built with it. The
protection level `N` is a parameter (default 2). `N` is the number of bit
flips an attacker needs to turn one valid codeword into another.

## The example machine

`scfi_fsm` is a four-state Mealy machine. Each edge fires one output:

```
        reset
          v
   +---> S0 ---x0/y0---> S1 ---x2/y2---+
   |      \                            v
   |       +--x1/y1---> S2 ---x3/y3--> S3 --x5/y5--> S3
   +--------------------x4/y4---------/
```

The conditions of a state are tested in order, as in `if (x0) ... else if
(x1) ...`. If no condition holds, the machine stays where it is. Counting
these "hold" edges, the CFG has ten edges. They are listed in
`scfi_example_pkg::EDGES` with:

- the source and destination state;
- `care`: the control signals the edge depends on;
- `expect_v`: the value of each of those signals;
- the output fired.

The order x4 before x5 in S3 is this design's choice. So are the explicit
hold edges of S2 and S3.

S3 can be entered from S1 and from S2. These two paths must end in the
same state code, even though the function's inputs differ. This is what the
modifiers below are for.

## Encodings

| item | width | codewords | distance |
|---|---|---|---|
| control signal x_i | N | TRUE = `1010...`, FALSE = `0101...` | N |
| state | 3N | 3-bit (index+1) repeated N times; S0..S3 = 1..4, ERROR = 5 | >= N |

The modules that drive the machine must produce the control codewords
themselves. That logic is not part of this repository. Input `x_e_i`
carries signal i in bits `[i*N +: N]`. A state code is never all zeros,
because the error logic writes all zeros when it detects a fault. The
particular codes are this design's choice. The scheme only requires the
minimum distance N.

## The hardened next-state function (`scfi_next_state`)

The function has six combinational stages. The MDS network inside it is
four XOR layers deep, followed by one AND layer.

1. **Pattern matching** (`scfi_pattern_match`). Each edge compares the
   state code with its source state. It also compares each signal in its
   `care` set with the codeword of the expected value. A full match raises
   that edge's 1-bit select. Valid inputs give exactly one match. A state
   or control word that is not a codeword gives none. The module also
   outputs the **active control word** `X_e_active`: the raw encoded input
   masked to the selected edge's `care` signals. Signals the current state
   ignores are therefore not absorbed, and corrupted bits in the signals it
   does use still flow onward.
2. **Modifier selection** (`scfi_mod_select`). A one-hot AND-OR
   multiplexer picks the modifier of the selected edge. With no match, the
   modifier is 0.
3. **Mix** (`scfi_mix`). The state code, the active control word and the
   modifier are each cut into K shares. Share i of all three forms the
   32-bit vector `L_i = {state share, control share, modifier share}`, most
   significant bit first.
4. **Diffusion** (`scfi_diffusion`). Each vector goes through its own MDS
   multiplier (`mds_mult`).
5. **Unmix** (`scfi_unmix`). The top SK bits of each output vector are one
   share of the next state `S_Ne`. The bottom `e = N` bits of each vector
   are error bits `E`. The bits in between are unused.
6. **Error logic** (`scfi_error`). `S_Ne` is ANDed with the AND of all
   error bits. If any error bit is 0, the output is the invalid all-zero
   word.

K is the smallest number of vectors with room for the state share, the
control share, and a modifier share at least as wide as the bits it must
force (SK + e). The modifier takes every bit that is left:

| N | state bits | control bits | K | per vector: state + control + modifier | forced bits per vector |
|---|---|---|---|---|---|
| 2 | 6 | 12 | 1 | 6 + 12 + 14 | 6 + 2 |
| 3 | 9 | 18 | 2 | 5 + 9 + 18 (state padded to 10) | 5 + 3 |
| 4 | 12 | 24 | 2 | 6 + 12 + 14 | 6 + 4 |

### The MDS multiplier (`mds_mult`)

The diffusion layer is the lightweight 4x4 MDS ("maximum distance
separable") matrix of Duval and Leurent. Its entries are polynomials in
alpha, and alpha is multiplication by X modulo X^8 + X^2 + 1:
`alpha*x = (x << 1) ^ (x[7] ? 8'h05 : 0)`. The 32-bit input is read as
bytes a, b, c, d, with a in bits 31:24. The network has eight byte-wide XORs
and three alpha multipliers. After each of the first three layers, the lanes
rotate by one position (a takes b, b takes c, c takes d, d takes the new a):

```
layer 1:  a ^= b          c ^= d
layer 2:  a ^= b          c ^= alpha*d
layer 3:  a ^= alpha*b    d  = alpha*d ;  c ^= d
layer 4:  a ^= b          c ^= d        (outputs a, b, c, d)
```

This equals the matrix below (3 = 1+alpha, 4 = alpha^2, 6 = alpha^2+alpha).
Rows are output bytes and columns are input bytes:

```
[3 1 2 3]
[1 3 2 2]
[4 6 3 1]
[4 4 1 3]
```

Every square sub-matrix of it is invertible, so its branch number is 5: a
change in any one input byte changes all four output bytes. The network was
taken from a drawing of the circuit. That reading was checked by confirming
this property, because a wrong lane crossing or a misplaced alpha breaks
it. `tb_mds_mult` checks the network against the matrix product, computed
from the coefficients.

### Modifiers: making paths collide

The MDS map is linear and invertible. So for each edge, with its source
state code and expected control word fixed in place, a modifier can be
chosen that makes the output hold exactly the destination code in its
state bits and ones in its error bits. The edges S1->S3 and S2->S3 have
different inputs but reach the same code this way.

Each vector gives SK + e linear equations over GF(2) in MK unknown modifier
bits. `scfi_pkg::solve_mod` solves them by Gauss-Jordan elimination. It is a
constant function, so the whole modifier table is computed while the design
is elaborated, for any `N`. Unused modifier bits are set to 0. If a system
had no solution, elaboration would stop with an error; for N = 2, 3 and 4
every system is solvable.

Because the map is linear, a modifier that is right for one (state, control)
pair gives a random-looking output for any other pair. That output counts as
a valid next state only if all K*(SK + e) constrained bits happen to match
one of the four state codes with every error bit set. For a random-looking
output the chance is 4/2^8 at N = 2, 4/2^16 at N = 3 and 4/2^20 at N = 4.
A wrong control codeword or state code is stopped earlier still: the
pattern matching finds no edge.

## State register, ERROR and alert (`scfi_fsm`)

```
unique case (state_q)
  S0, S1, S2, S3: state_d = phi_FH(state_q, x_e);
  ERROR:          state_d = ERROR;            alert
  default:        state_d = ERROR;            alert
endcase
```

`rst_ni` is an asynchronous, active-low reset to S0, and it is the only way
out of ERROR. `alert_o` is combinational. It is high while the register
holds ERROR or any code that is not a state. A fault therefore shows in the
first cycle its corrupted state is in the register, and ERROR follows one
cycle later. The outputs `y_o` decode the selected edge and are **not**
hardened. An assertion checks that at most one edge is ever selected.

## What a fault does

- **State register** (one to N-1 flipped bits). The word is not a state
  code. The alert rises at once and ERROR follows.
- **Control signal the current state depends on** (one to N-1 flips). No
  edge matches, the modifier is 0, and the MDS output is not a valid state,
  with high probability.
- **Control signal the current state ignores.** It is masked out, so it has
  no effect.
- **Inside the MDS network.**
  - A flip in layers 1 to 3 reaches at least two output bytes.
  - A flip in layer 4 changes one bit of one output byte. That can never
    turn one valid state code into another, because the codes are N bits
    apart.
  - `tb_scfi_fault_campaign` flips each of the 72 byte-wire bits of the
    network (eight XOR outputs and the alpha-multiplied lane), one at a
    time, on each of the ten edges: 720 faults at N = 2. Of these, 230
    land in unused bits and have no effect, 490 are detected, and none
    sends the machine to a wrong valid state. This is a wire-level model.
    A gate-level netlist has more fault sites and may show a small hijack
    rate.
- **Known weak point: the 1-bit edge selects.** A fault that forces a
  different select high, while that edge's conditions also happen to hold
  in codeword form, swaps the edge within the CFG. Encoding the selects
  would close this. It is not done here.

## How far this follows the published scheme

The following follow the published scheme:

- the CFG of the example;
- the case statement with ERROR and default;
- the requirements of distance-N encodings;
- the six stages and their order;
- 32-bit MDS blocks with this matrix and field;
- modifiers forcing the next state and all-ones error bits;
- the AND-based infection;
- 1-bit selects.

The following are this design's own choices:

- the codewords of states and control signals;
- e = N error bits per vector;
- the bit layout of the vectors, with the error bits at the least
  significant end. The published text says "topmost bits", but its block
  drawing puts them at the end opposite the state share. The drawing was
  followed.
- the single AND reduction of E before the infection AND;
- masking the active control word with the edge's `care` set;
- the GF(2) solver;
- the byte order;
- the alert staying high in ERROR;
- the reset style.

The published scheme is a synthesis pass that hardens any FSM
automatically. Here the CFG is fixed in `scfi_example_pkg`. To harden
another machine, replace its `EDGES` table and state enum. The stages and
the modifier solver do not depend on the particular CFG, but the state
index width is fixed at 3 bits (up to 7 states including ERROR).

## Files

| file | content |
|---|---|
| `rtl/scfi_pkg.sv` | alpha, MDS as a constant function, codewords, widths, modifier solver |
| `rtl/scfi_example_pkg.sv` | CFG of the example machine |
| `rtl/mds_mult.sv` | MDS multiplier (XOR network) |
| `rtl/scfi_pattern_match.sv`, `scfi_mod_select.sv`, `scfi_mix.sv`, `scfi_diffusion.sv`, `scfi_unmix.sv`, `scfi_error.sv` | the six stages |
| `rtl/scfi_next_state.sv` | the hardened next-state function |
| `rtl/scfi_fsm.sv` | top: the hardened example machine |
| `tb/scfi_tb_pkg.sv` | independent reference models (matrix MDS, unprotected machine) |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_scfi_fsm_levels.sv`, `tb/scfi_fsm_level_check.sv` | the machine at N = 3 and 4 |
| `tb/tb_scfi_fault_campaign.sv` | exhaustive single-bit faults in the MDS network |

## Simulating

From the repository root, with Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/scfi_pkg.sv rtl/scfi_example_pkg.sv tb/scfi_tb_pkg.sv tb/tb_scfi_fsm.sv \
  --top-module tb_scfi_fsm
./obj_dir/Vtb_scfi_fsm
```

Replace `tb_scfi_fsm` with any other testbench name. Each testbench ends
with `TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.
`-Wno-fatal` is needed because some testbenches inject faults with `force`
on internal signals, and Verilator warns about that.

`tb_scfi_fsm` runs the top at its default N = 2:

- a 3000-cycle random walk checked against the unprotected reference;
- 100 control faults;
- 100 ignored-signal faults;
- 100 state-register faults;
- 200 faults inside the function.

It requires that every edge, both paths into S3, each kind of fault, the
terminal ERROR state and the exit by reset each occur at least once. It
finishes in well under a second. At N = 2 the whole machine synthesizes
to about 90 word-level cells and 6 flip-flops. To change the protection level,
set `scfi_fsm #(.N(3))`; all widths and the modifier table follow.
