// dr_register: register bank between two indicating stages.
//
// Every rail of the bus passes through its own 2-input C-element whose
// other input is the bank's ACKIN, the complement of the ACKOUT of the
// completion detector that watches the following stage. With ACKIN at 1
// the bank lets rails rise (RTZ data, RTO spacer); with ACKIN at 0 it lets
// rails fall (RTZ spacer, RTO data). A rail that is not allowed to move
// yet is held, which is what stops a new token from overwriting one the
// next stage has not acknowledged. One C-element per rail follows the
// paper. There is no clock. The asynchronous active-high reset, which
// forces every rail to the spacer level of PROTO, is this design's
// addition.
module dr_register
  import dr_pkg::*;
#(
  parameter protocol_e   PROTO = RTO,
  parameter int unsigned WIDTH = 8
) (
  input  logic            rst,
  input  dr_t [WIDTH-1:0] d,
  input  logic            ackin,
  output dr_t [WIDTH-1:0] q
);

  localparam bit IDLE = idle_level(PROTO);

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    c_element_rst #(.RST_VAL(IDLE)) u_c1 (.in({ackin, d[i].r1}), .rst(rst), .z(q[i].r1));
    c_element_rst #(.RST_VAL(IDLE)) u_c0 (.in({ackin, d[i].r0}), .rst(rst), .z(q[i].r0));
  end

endmodule
