// tb_dr_and2: runs and_check for RTZ and RTO.
module tb_dr_and2
  import dr_pkg::*;
;
  int   c[2], f[2];
  logic d[2];

  and_check #(.PROTO(RTZ)) u0 (.checks(c[0]), .failures(f[0]), .done(d[0]));
  and_check #(.PROTO(RTO)) u1 (.checks(c[1]), .failures(f[1]), .done(d[1]));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1], f[0]+f[1]+1);
    $finish;
  end

  initial begin
    #1;
    wait (d[0] && d[1]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1], f[0]+f[1]);
    $finish;
  end
endmodule
