# An indicating asynchronous 4x4 array multiplier in SystemVerilog

This is an unsigned N x N multiplier (N = 4 by default) that has no clock.
Each operand and product bit travels on two wires. The code on those wires
says whether the bit is present yet, so the circuit does not need a timing
assumption to know when a result is valid. The last gate to fire on the
result bus fires only after every operand bit has arrived, and the bus
becomes empty again only after every operand bit has left. A completion
detector watching the product can therefore acknowledge the operands, and
that acknowledgement holds for any gate or wire delays. Such a circuit is
called *indicating*.

The structure follows the design in P. Balasubramanian, D. L. Maskell and
N. E. Mastorakis, "Indicating Asynchronous Multipliers". That work compares
fourteen variants: seven full-adder styles, each under two handshake
protocols. This RTL builds the variant it recommends, a weak-indication
array multiplier with strongly indicating partial-product ANDs. The RTL
provides both protocols through one parameter. Where this RTL departs from
the published design or fills a gap in it, the text below says so.

## Dual-rail codes and the two four-phase protocols

Each logical bit `X` is carried by a `dr_t` struct with two rails: `r1`
signals a 1 and `r0` signals a 0. At most one rail is active.

| protocol | active level | spacer (no data) | data 1 | data 0 | illegal |
|---|---|---|---|---|---|
| RTZ, return to zero | 1 | `r1=0 r0=0` | `r1=1 r0=0` | `r1=0 r0=1` | `1 1` |
| RTO, return to one | 0 | `r1=1 r0=1` | `r1=0 r0=1` | `r1=1 r0=0` | `0 0` |

Between any two data words the bus goes back to the *spacer*. In RTZ a
word is data then spacer; in RTO it is spacer then data. An RTO circuit is
the RTZ circuit with every rail inverted. The C-elements stay as they are,
and every OR gate becomes an AND gate (De Morgan). Every module here takes
`PROTO` (`dr_pkg::RTZ` or `dr_pkg::RTO`) and picks the OR or AND form by
`generate`. The default is RTO, the protocol the source design found to give
the shorter cycle time. `dr_pkg` also holds the helpers the testbenches use
(`dr_encode`, `dr_value`, `dr_is_data`, `dr_is_spacer`, `dr_is_illegal`).

A note on rail names. The source defines the RTO codes with the rail names
swapped relative to the table above. Its gate diagrams, however, obtain RTO
from RTZ by inverting every rail. This RTL uses that second rule, so `r1`
means "one" in both protocols. On the wires, only the naming differs.

## The C-element

Everything that holds state here is a Muller C-element (`c_element`). Its
output goes to 1 when all its inputs are 1, goes to 0 when all are 0, and
otherwise holds. In a standard-cell flow it is an AO222 cell with its output
fed back to two inputs. This RTL writes it as a latch that is transparent
when all inputs agree. The two forms have the same next-state function, and
the latch form keeps the feedback out of the simulators. Synthesis therefore
reports latches (`$dlatch`), one per C-element, and that is intended.

## The stage: register banks, completion detectors and the ring

`indicating_multiplier` is the top module. It places the multiplier in one
asynchronous pipeline stage:

```
 a,b ──► operand bank ──► array_multiplier ──► product bank ──► p
          (dr_register)                         (dr_register)
           ▲ ACKIN   │                            ▲ ACKIN  │
           │         ▼                            │        ▼
           │     operand CD ──► ackout            │    product CD
           └──────── NOT ◄────────────────────────┼────────┘
                                                  └── NOT ◄── rx_ackout
```

* A **register bank** (`dr_register`) has one 2-input C-element per rail.
  The second input of each C-element is the bank's ACKIN. With ACKIN = 1
  rails may rise; with ACKIN = 0 they may fall. A new word therefore cannot
  overwrite a word that the next stage has not acknowledged.
* A **completion detector** (`completion_detector`) merges the two rails of
  each bit with an OR (RTZ) or an AND (RTO). It then joins the merged
  signals with a balanced binary tree of 2-input C-elements. In RTZ its
  output ACKOUT is 1 once every bit is data and 0 once every bit is spacer.
  In RTO the levels are the other way round.
* Each bank's ACKIN is the complement of the ACKOUT of the detector behind
  it. For the operand bank that is the product detector. For the product
  bank it is the receiver's `rx_ackout`.

The operand detector's output is the port `ackout`. The transmitter treats
its complement as its own ACKIN. In RTZ one transaction runs as follows:

1. `ackout = 0`: the transmitter may send data.
2. `ackout` rises once the operand bank holds all 2N operand bits.
3. The transmitter returns the bus to spacer.
4. `ackout` falls once the operand bank is all spacer again.

The receiver works the same way. It raises `rx_ackout` after it has taken a
complete product and lowers it after the product has returned to spacer. In
RTO every level is inverted and the spacer comes first.

If the receiver is slow, the product bank keeps the old product. The product
detector then blocks the operand bank, so the stage stalls and no word is
lost. Lint and synthesis report this path (bank, multiplier, bank, detector,
inverter, and back to the first bank) as a combinational loop. It is the
stage's handshake ring. Every element on it is a C-element, and the protocol
lets it settle after each transition.

**Reset.** The source design does not mention one. A ring of C-elements that
starts from random values can deadlock, so both banks are built from
`c_element_rst`, whose asynchronous, active-high `rst` forces every rail to
the spacer level. Hold `rst` while `a` and `b` are spacer and the receiver
is idle (`rx_ackout` = 0 in RTZ, 1 in RTO). Everything behind the banks then
settles to its idle value by itself.

## Partial products: the strongly indicating AND

`dr_and2` implements the source's gate diagram. Four 2-input C-elements
decode the input combinations:

* `C1 = C(X1,Y1)` drives `Z1`.
* `C2 = C(X0,Y0)`, `C3 = C(X0,Y1)` and `C4 = C(X1,Y0)` are merged into `Z0`
  by an OR gate (RTZ) or an AND gate (RTO).

Exactly one C-element fires per data word. The output therefore waits for
both inputs (*strong indication*), and it returns to spacer only after both
inputs have. A gate with a single dual-rail output cannot be weakly
indicating, so this is the only form the partial products can take.

## The weak-indication full adder

A weakly indicating circuit may produce some outputs from part of its
inputs, but at least one output must wait for all of them, both for data and
for the spacer. The source builds its best multiplier around a specific
"biased" weak-indication adder taken from earlier work. That adder's gates
are not part of the multiplier description, so `dr_full_adder` is this
design's own weak-indication adder, built from the same parts:

* Eight 3-input C-elements `m[abc]`, one per input word.
* **Sum** = disjoint merge of the odd minterms (`r1`) and of the even
  minterms (`r0`). It waits for all three inputs and returns to spacer only
  after all three have, so it indicates every input.
* **Carry**: two extra 2-input C-elements, `C(a1,b1)` and `C(a0,b0)`, decide
  the carry as soon as `a` and `b` agree, without waiting for `cin`. The
  minterms where `a != b` supply the remaining carry terms. The carry may
  therefore switch before the sum; this is the weak-indication behaviour.
* Every merge combines disjoint terms. Exactly one path is activated per
  data word (the *monotonic cover* condition), so each internal gate that
  fires is seen at an output and no transition goes unacknowledged.

The result is correct and indicating, and it is tested exhaustively. It is
not the gate netlist of the adder the source measured, so its gate count and
speed say nothing about that adder.

### Adders with a constant carry-in

N of the N(N-1) adders add only two live signals; their carry-in is the
constant logic 0. Written as a constant code, that is `(r1,r0) = (0,1)` in
RTZ and `(1,0)` in RTO. In other words, the true rail is tied to 0 in RTZ
and to 1 in RTO, which is how the source states it.

A rail held permanently at the active level must not enter a C-element
directly. The gate would set once and never reset. These adders are
therefore instantiated with `CIN_ZERO = 1`, which applies the constant
inside the gates: the minterms with `cin = 1` are removed and the minterms
with `cin = 0` become 2-input C-elements on `a` and `b`. Their `cin` port is
unused, and lint says so.

## The array

`array_multiplier` reproduces the source's 4x4 array and generalises it to
any N >= 2. `pp[i][j] = A[j]·B[i]` (N² `dr_and2` instances). Adder (k,j)
sits in row k and has weight j+k:

| row | adder (k,j), j = 0..N-2, adds | carry in |
|---|---|---|
| 1 | `A[j+1]B[0]`, `A[j]B[1]` | constant 0 |
| 2..N-1 (carry save) | `A[j]B[k]`, sum of (k-1,j+1) (for j = N-2: `A[N-1]B[k-1]`) | carry of (k-1,j) |
| N (ripple) | sum of (N-1,j+1) (for j = N-2: `A[N-1]B[N-1]`), carry of (N-1,j) | j = 0: constant 0; else carry of (N,j-1) |

Outputs: `P[0] = A[0]B[0]`, `P[k]` = sum of (k,0) for k < N, `P[N+j]` = sum
of (N,j), and `P[2N-1]` = carry of (N,N-2). For N = 4 this gives 16 ANDs and
12 adders, 4 of them with a constant carry, as in the source.

The source reports that data and spacer take the same longest path through
the array and that forward and reverse latencies are equal. Since one cycle
is one data phase plus one spacer phase, the cycle time is about twice the
delay of that path.

Every operand bit reaches a product bit through a chain of adder sums, and a
sum indicates all of its inputs. The product is therefore complete only
after the last operand bit has arrived. It is all spacer again only after
the last operand bit has left. Product bits whose inputs are already
complete may turn valid earlier, which makes the whole multiplier weakly
indicating.

## Interface of the top

| port | dir | type | meaning |
|---|---|---|---|
| `rst` | in | `logic` | asynchronous reset of both banks to spacer |
| `a`, `b` | in | `dr_t [N-1:0]` | operands from the transmitter |
| `ackout` | out | `logic` | operand detector ACKOUT; the transmitter's ACKIN is its complement |
| `p` | out | `dr_t [2N-1:0]` | product, held by the product bank until acknowledged |
| `rx_ackout` | in | `logic` | receiver's ACKOUT; its complement is the product bank's ACKIN |

Parameters: `PROTO` (default `RTO`) and `N` (default 4). There is no clock,
and the RTL has no delays. Simulation shows the order of events, not how
long they take.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog if the
handshake deadlocks.

| testbench | what it checks |
|---|---|
| `tb_c_element` | 2- and 3-input C-elements against a next-state model, 2000 random steps |
| `tb_completion_detector` | RTZ and RTO, 8 and 3 bits: bits arrive and leave one at a time in random order; ACKOUT changes only at the last bit |
| `tb_dr_register` | random rails, ACKIN and reset against a per-rail C-element model |
| `tb_dr_and2` | all inputs and both arrival orders, both protocols: no output before both operands, none lost before both leave |
| `tb_dr_full_adder` | every input word in all six arrival orders, both protocols, general and constant-carry forms: sum waits for all inputs, early carries are correct (and must occur), no illegal code |
| `tb_array_multiplier` | all 256 pairs of the 4x4 array in RTZ and RTO, plus a 6x6 and a 2x2 array; operand bits arrive in random order; the product must not be complete early and bits already valid must be final |
| `tb_indicating_multiplier` | full four-phase runs of 4x4 RTZ and RTO stages (all 256 pairs each) and a 5x5 RTZ stage; random transmitter gaps and a randomly slow receiver |
| `tb_indicating_multiplier_full` | the top with default parameters (4x4, RTO), all 256 pairs end to end |

The two stage testbenches use `tb/stage_env.sv`, a behavioural transmitter
and receiver. They count how often each mechanism occurred: data words,
spacer words, stalls (the operand bank took a word while the receiver still
held the previous product), and product bits that became valid before the
last operand bit (weak indication). A mechanism that never occurs counts as
a failure.

Run any testbench with plain Verilator 5 from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal rtl/dr_pkg.sv -Irtl -Itb \
    tb/tb_indicating_multiplier.sv --top-module tb_indicating_multiplier
./obj_dir/Vtb_indicating_multiplier +verilator+rand+reset+2
```

`-Wno-fatal` is needed because Verilator warns about the intended
combinational loops (`UNOPTFLAT`) and latches. Each run finishes in well
under a second.

## How far to trust it, and where it departs from the source

* **Follows the source:** dual-rail RTZ and RTO encodings; C-element
  register banks; OR/AND plus C-element-tree completion detectors; ACKIN as
  the complement of ACKOUT; the strongly indicating AND; the 4x4 array with
  16 ANDs, 12 full adders and 4 constant carries.
* **This design's choices:**
  * The full-adder netlist. The source's adder is named but not drawn.
  * The treatment of the constant carry-in, `CIN_ZERO`.
  * The reset.
  * The binary shape of the completion trees.
  * C-elements written as latches instead of AO222 loops.
  * RTO as the default protocol.
  * The generalisation to N.
* **Not covered:** cycle time, area and power depend on a cell library and
  gate delays, so the RTL cannot reproduce them. The six other full-adder
  styles the source compares against are not built. Gate-level hazards such
  as gate orphans and isochronic forks are properties of a netlist and its
  layout. The zero-delay simulation here checks the logical indication
  property, not those.
