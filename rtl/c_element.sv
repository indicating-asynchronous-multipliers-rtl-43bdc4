// c_element: N-input Muller C-element, the storage and synchronisation
// element of the whole design.
//
// The output goes to 1 once every input is 1, goes to 0 once every input
// is 0, and otherwise keeps its value. It is written as a level-sensitive
// latch whose enable is "all inputs equal" and whose data is the common
// input value. In a standard-cell flow the same next-state function
// z' = ab + z(a + b) is built from an AO222 cell whose output is fed back
// to two of its inputs; the latch form has the identical behaviour and
// keeps the combinational feedback out of the simulators. The latch that
// synthesis reports for this module is therefore intended: a C-element is
// a state-holding gate. Verilator's lint says the output depends on itself
// (UNOPTFLAT, circular logic) and may add that it finds no latch in the
// always_latch block: both describe the hold case, inputs unequal, which is
// the latch and the reason the gate exists.
//
// There is no reset. In every use in this design the spacer drives all
// inputs to the idle level, which sets the output to a known value.
// The 2-input form is the one named by the multiplier design; the 3-input
// form is used inside the full adder.
module c_element #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0] in,
  output logic         z
);

  always_latch begin
    if (&in)       z = 1'b1;
    else if (~|in) z = 1'b0;
  end

endmodule
