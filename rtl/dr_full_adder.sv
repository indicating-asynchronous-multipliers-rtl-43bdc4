// dr_full_adder: weak-indication dual-rail full adder.
//
// Eight 3-input C-elements decode the eight data combinations of
// (a, b, cin); each fires for exactly one input word. The sum rails are the
// disjoint merges of the four odd and the four even minterms, so the sum
// waits for all three inputs and returns to spacer only after all three
// have (it indicates every input). The carry rails add two 2-input
// C-elements, C(a1,b1) and C(a0,b0), which decide the carry as soon as a
// and b agree, without waiting for cin; the other carry terms reuse the
// minterms where a and b differ. The carry may therefore switch before the
// sum (weak indication), while the sum keeps every gate acknowledged. All
// merges use disjoint terms (monotonic cover), OR for RTZ and AND for RTO.
// Lint reports m, g1 and g0 as circular logic: that is the hold feedback
// of each C-element (see c_element), not a loop between gates.
//
// With CIN_ZERO set the adder is the one used where the carry input is the
// constant logic 0: the constant is propagated through the gates, so the
// minterms with cin = 1 are removed (tied to the idle level) and those with
// cin = 0 become 2-input C-elements on a and b. Feeding a constant active
// rail into a 3-input C-element instead would let it set but never reset.
// The cin port is then not read.
//
// The multiplier design calls for a weak-indication full adder taken from
// earlier work without listing its gates; this netlist is this design's
// own weak-indication adder built from the same C-element and OR/AND
// parts, not a copy of that adder.
module dr_full_adder
  import dr_pkg::*;
#(
  parameter protocol_e PROTO    = RTO,
  parameter bit        CIN_ZERO = 1'b0
) (
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
);

  // m[{va,vb,vc}] fires when (a,b,cin) = (va,vb,vc).
  logic [7:0] m;
  logic       g1, g0;  // a = b = 1, a = b = 0

  for (genvar k = 0; k < 8; k++) begin : g_min
    localparam bit VA = k[2];
    localparam bit VB = k[1];
    localparam bit VC = k[0];
    if (!CIN_ZERO) begin : g_c3
      c_element #(.N(3)) u_m (
        .in ({VA ? a.r1 : a.r0, VB ? b.r1 : b.r0, VC ? cin.r1 : cin.r0}),
        .z  (m[k])
      );
    end else if (!VC) begin : g_c2
      c_element #(.N(2)) u_m (
        .in ({VA ? a.r1 : a.r0, VB ? b.r1 : b.r0}),
        .z  (m[k])
      );
    end else begin : g_never
      assign m[k] = idle_level(PROTO);
    end
  end

  c_element #(.N(2)) u_g1 (.in({a.r1, b.r1}), .z(g1));
  c_element #(.N(2)) u_g0 (.in({a.r0, b.r0}), .z(g0));

  if (PROTO == RTZ) begin : g_rtz
    assign sum.r1  = m[3'b001] | m[3'b010] | m[3'b100] | m[3'b111];
    assign sum.r0  = m[3'b000] | m[3'b011] | m[3'b101] | m[3'b110];
    assign cout.r1 = g1 | m[3'b011] | m[3'b101];
    assign cout.r0 = g0 | m[3'b010] | m[3'b100];
  end else begin : g_rto
    assign sum.r1  = m[3'b001] & m[3'b010] & m[3'b100] & m[3'b111];
    assign sum.r0  = m[3'b000] & m[3'b011] & m[3'b101] & m[3'b110];
    assign cout.r1 = g1 & m[3'b011] & m[3'b101];
    assign cout.r0 = g0 & m[3'b010] & m[3'b100];
  end

endmodule
