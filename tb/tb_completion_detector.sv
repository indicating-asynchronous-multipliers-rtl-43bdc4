// tb_completion_detector: runs cd_check for RTZ and RTO, for the 8-bit
// product bus and for an odd width (3 bits), so the C-element tree is
// tested both full and ragged.
module tb_completion_detector
  import dr_pkg::*;
;
  int   c[4], f[4];
  logic d[4];
  int   checks, failures;

  cd_check #(.PROTO(RTZ), .WIDTH(8)) u0 (.checks(c[0]), .failures(f[0]), .done(d[0]));
  cd_check #(.PROTO(RTO), .WIDTH(8)) u1 (.checks(c[1]), .failures(f[1]), .done(d[1]));
  cd_check #(.PROTO(RTZ), .WIDTH(3)) u2 (.checks(c[2]), .failures(f[2]), .done(d[2]));
  cd_check #(.PROTO(RTO), .WIDTH(3)) u3 (.checks(c[3]), .failures(f[3]), .done(d[3]));

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2]+c[3], f[0]+f[1]+f[2]+f[3]+1);
    $finish;
  end

  initial begin
    #1;
    wait (d[0] && d[1] && d[2] && d[3]);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
