// tb_dr_full_adder: runs fa_check for RTZ and RTO, in the general form and
// in the constant-carry (CIN_ZERO) form, and requires that the early carry
// (the weak-indication behaviour) was seen in each general-form run.
module tb_dr_full_adder
  import dr_pkg::*;
;
  int   c[4], f[4], e[4];
  logic d[4];

  fa_check #(.PROTO(RTZ)) u0 (.checks(c[0]), .failures(f[0]), .early_carry(e[0]), .done(d[0]));
  fa_check #(.PROTO(RTO)) u1 (.checks(c[1]), .failures(f[1]), .early_carry(e[1]), .done(d[1]));
  fa_check #(.PROTO(RTZ), .CIN_ZERO(1'b1)) u2 (.checks(c[2]), .failures(f[2]), .early_carry(e[2]), .done(d[2]));
  fa_check #(.PROTO(RTO), .CIN_ZERO(1'b1)) u3 (.checks(c[3]), .failures(f[3]), .early_carry(e[3]), .done(d[3]));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum()+1);
    $finish;
  end

  initial begin
    int checks, failures;
    #1;
    wait (d[0] && d[1] && d[2] && d[3]);
    checks = c.sum() + 2;
    failures = f.sum() + int'(e[0] == 0) + int'(e[1] == 0);
    $display("early carries: RTZ %0d, RTO %0d", e[0], e[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
