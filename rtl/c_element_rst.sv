// c_element_rst: 2-input Muller C-element with an asynchronous,
// active-high reset that forces the output to RST_VAL.
//
// Outside reset it behaves exactly as c_element (output follows the inputs
// when they agree, holds when they differ). It is used in the register
// banks so that a whole stage can be brought to the spacer state at power
// up; the gates behind the banks then settle on their own because every
// input they see is at the idle level. The reset is this design's
// addition: the multiplier design itself does not specify one. Like
// c_element it is a latch by intent.
module c_element_rst #(
  parameter bit RST_VAL = 1'b0
) (
  input  logic [1:0] in,
  input  logic       rst,
  output logic       z
);

  always_latch begin
    if (rst)            z = RST_VAL;
    else if (&in)       z = 1'b1;
    else if (~|in)      z = 1'b0;
  end

endmodule
