// dr_and2: strongly indicating dual-rail 2-input AND, the partial
// product generator of the array multiplier.
//
// Four 2-input C-elements decode the four input combinations:
//   C1 = C(X1,Y1) drives Z1 directly (X = Y = 1);
//   C2 = C(X0,Y0), C3 = C(X0,Y1), C4 = C(X1,Y0) are merged into Z0 by an
//   OR gate (RTZ) or an AND gate (RTO).
// Exactly one C-element fires per data word, so the output waits for both
// inputs (strong indication), and it returns to spacer only when both
// inputs have. The gate structure is the paper's; the RTO form is the RTZ
// form with OR replaced by AND. Lint reports c2..c4 and Z1 as circular
// logic: that is the hold feedback of each C-element (see c_element).
module dr_and2
  import dr_pkg::*;
#(
  parameter protocol_e PROTO = RTO
) (
  input  dr_t x,
  input  dr_t y,
  output dr_t z
);

  logic c2, c3, c4;

  c_element #(.N(2)) u_c1 (.in({x.r1, y.r1}), .z(z.r1));
  c_element #(.N(2)) u_c2 (.in({x.r0, y.r0}), .z(c2));
  c_element #(.N(2)) u_c3 (.in({x.r0, y.r1}), .z(c3));
  c_element #(.N(2)) u_c4 (.in({x.r1, y.r0}), .z(c4));

  if (PROTO == RTZ) begin : g_rtz
    assign z.r0 = c2 | c3 | c4;
  end else begin : g_rto
    assign z.r0 = c2 & c3 & c4;
  end

endmodule
