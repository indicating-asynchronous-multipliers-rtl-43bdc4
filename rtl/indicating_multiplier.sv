// indicating_multiplier: the dual-rail array multiplier as one complete
// indicating asynchronous stage.
//
//   a,b --> [operand register bank] --> array_multiplier --> [product
//            |        ^ ACKIN                                 register bank] --> p
//            v        |                                        |     ^ ACKIN
//   ackout <- CD_in   +-- NOT <-- CD_out <---------------------+     +-- NOT <-- rx_ackout
//
// The operand bank (2N dual-rail bits) is the current-stage register, the
// product bank (2N dual-rail bits) the next-stage register. Each bank's
// ACKIN is the complement of the ACKOUT of the completion detector behind
// it: the product detector for the operand bank, the receiver for the
// product bank. The operand completion detector produces ackout for the
// transmitter, which uses its complement as its own ACKIN.
//
// Four-phase handshake seen from the transmitter (RTZ; RTO swaps every
// level, and the spacer precedes the data):
//   1. ackout = 0: send data. 2. ackout rises once every operand bit has
//   been captured. 3. send spacer. 4. ackout falls once every operand bit
//   is spacer again.
// Seen from the receiver: p becomes complete data, the receiver raises
// rx_ackout (RTZ) after taking it, p returns to spacer, rx_ackout falls.
// The operand bank cannot take the next token until the product bank has
// captured the current one, so a slow receiver stalls the transmitter.
// There is no clock. rst (asynchronous, active high) forces both register
// banks to spacer; hold it while a and b are spacer and the receiver is idle
// (rx_ackout = 0 in RTZ, 1 in RTO), and every other C-element settles to its
// idle value behind the banks. The stage structure follows the paper; the
// reset and the default protocol (RTO) are this design's choices.
//
// Lint and synthesis report combinational loops through this module: the
// path bank -> multiplier -> bank -> completion detector -> inverter ->
// ACKIN of the first bank is the handshake ring of the stage, and every
// element on it is a C-element (a latch). The loop is the circuit's
// intended asynchronous feedback; the four-phase protocol makes it settle
// after every transition instead of oscillating.
module indicating_multiplier
  import dr_pkg::*;
#(
  parameter protocol_e   PROTO = RTO,
  parameter int unsigned N     = 4
) (
  input  logic          rst,
  input  dr_t [N-1:0]   a,
  input  dr_t [N-1:0]   b,
  output logic          ackout,
  output dr_t [2*N-1:0] p,
  input  logic          rx_ackout
);

  dr_t [2*N-1:0] opnd_d, opnd_q, prod_d;
  dr_t [N-1:0]   a_q, b_q;
  logic          prod_ackout;

  assign opnd_d = {b, a};
  assign {b_q, a_q} = opnd_q;

  dr_register #(.PROTO(PROTO), .WIDTH(2*N)) u_opnd_reg (
    .rst(rst), .d(opnd_d), .ackin(!prod_ackout), .q(opnd_q)
  );

  completion_detector #(.PROTO(PROTO), .WIDTH(2*N)) u_opnd_cd (
    .bus(opnd_q), .ackout(ackout)
  );

  array_multiplier #(.PROTO(PROTO), .N(N)) u_mult (
    .a(a_q), .b(b_q), .p(prod_d)
  );

  dr_register #(.PROTO(PROTO), .WIDTH(2*N)) u_prod_reg (
    .rst(rst), .d(prod_d), .ackin(!rx_ackout), .q(p)
  );

  completion_detector #(.PROTO(PROTO), .WIDTH(2*N)) u_prod_cd (
    .bus(p), .ackout(prod_ackout)
  );

endmodule
