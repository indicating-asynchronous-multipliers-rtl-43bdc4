// and_check: exercises one dual-rail AND in one protocol. For each of the
// four operand pairs and both arrival orders it checks that Z stays spacer
// after the first operand (strong indication), equals X AND Y after the
// second, stays data while one operand is still data during the return to
// spacer, and is spacer after both have returned.
module and_check
  import dr_pkg::*;
#(
  parameter protocol_e PROTO = RTZ
) (
  output int   checks,
  output int   failures,
  output logic done
);
  dr_t x, y, z;

  dr_and2 #(.PROTO(PROTO)) dut (.x(x), .y(y), .z(z));

  task automatic expect_z(dr_t want, string what);
    checks++;
    if (z !== want) begin
      failures++;
      $display("%s %s: x=%b y=%b z=%b expected %b", PROTO.name(), what, x, y, z, want);
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    x = dr_spacer(PROTO); y = dr_spacer(PROTO);
    #1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int k = 0; k < 8; k++) begin
        logic vx, vy, x_first;
        vx = k[0]; vy = k[1]; x_first = k[2];
        if (x_first) x = dr_encode(PROTO, vx); else y = dr_encode(PROTO, vy);
        #1 expect_z(dr_spacer(PROTO), "one operand");
        if (x_first) y = dr_encode(PROTO, vy); else x = dr_encode(PROTO, vx);
        #1 expect_z(dr_encode(PROTO, vx & vy), "both operands");
        if (rep[0]) x = dr_spacer(PROTO); else y = dr_spacer(PROTO);
        #1 expect_z(dr_encode(PROTO, vx & vy), "one spacer");
        x = dr_spacer(PROTO); y = dr_spacer(PROTO);
        #1 expect_z(dr_spacer(PROTO), "both spacer");
      end
    end
    done = 1'b1;
  end
endmodule
