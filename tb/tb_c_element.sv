// tb_c_element: checks the 2- and 3-input C-element against a reference
// model of its next-state rule (all ones -> 1, all zeros -> 0, else hold).
// Random input words are applied one per time step after an all-zero
// initialisation; every step compares the output with the model.
module tb_c_element;
  logic [1:0] in2;
  logic [2:0] in3;
  logic       z2, z3;
  logic       ref2, ref3;
  int         checks = 0, failures = 0;
  int         holds = 0;

  c_element #(.N(2)) dut2 (.in(in2), .z(z2));
  c_element #(.N(3)) dut3 (.in(in3), .z(z3));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in2 = '0; in3 = '0; ref2 = 1'b0; ref3 = 1'b0;
    #1;
    for (int t = 0; t < 2000; t++) begin
      in2 = 2'($urandom);
      in3 = 3'($urandom);
      if (&in2) ref2 = 1'b1; else if (~|in2) ref2 = 1'b0; else holds++;
      if (&in3) ref3 = 1'b1; else if (~|in3) ref3 = 1'b0;
      #1;
      checks += 2;
      if (z2 !== ref2) begin
        failures++;
        $display("N=2 in=%b z=%b expected %b", in2, z2, ref2);
      end
      if (z3 !== ref3) begin
        failures++;
        $display("N=3 in=%b z=%b expected %b", in3, z3, ref3);
      end
    end
    checks++;
    if (holds == 0) begin
      failures++;
      $display("hold case never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
