// completion_detector: acknowledges that a whole dual-rail bus has
// become data, or has become spacer.
//
// Each bit's two rails are merged by a 2-input OR (RTZ) or a 2-input AND
// (RTO); the merged signals are joined by a balanced binary tree of
// 2-input C-elements whose root is ACKOUT.
//   RTZ: ACKOUT rises when every bit holds data, falls when every bit is
//        spacer (0,0).
//   RTO: ACKOUT falls when every bit holds data, rises when every bit is
//        spacer (1,1).
// The OR/AND-then-C-element structure follows the paper's completion
// detector; the shape of the tree (binary, heap ordered) is this design's
// choice. There is no clock: ACKOUT follows the bus after the gate delays.
module completion_detector
  import dr_pkg::*;
#(
  parameter protocol_e   PROTO = RTO,
  parameter int unsigned WIDTH = 8
) (
  input  dr_t [WIDTH-1:0] bus,
  output logic            ackout
);

  // node[0] is the root; node[WIDTH-1 +: WIDTH] are the merged bits.
  logic [2*WIDTH-2:0] node;

  for (genvar i = 0; i < WIDTH; i++) begin : g_merge
    if (PROTO == RTZ) begin : g_or
      assign node[WIDTH-1+i] = bus[i].r1 | bus[i].r0;
    end else begin : g_and
      assign node[WIDTH-1+i] = bus[i].r1 & bus[i].r0;
    end
  end

  for (genvar k = 0; k < WIDTH-1; k++) begin : g_tree
    c_element #(.N(2)) u_c (
      .in ({node[2*k+2], node[2*k+1]}),
      .z  (node[k])
    );
  end

  assign ackout = node[0];

endmodule
