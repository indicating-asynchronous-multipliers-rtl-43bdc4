// tb_array_multiplier: am_check over all 256 operand pairs of the 4x4
// multiplier in RTZ and RTO, plus random pairs of a 6x6 and a 2x2 array to
// exercise the width parameter. Requires early product bits (weak
// indication) to have been seen.
module tb_array_multiplier
  import dr_pkg::*;
;
  localparam int K = 4;
  int   c[K], f[K], e[K];
  logic d[K];

  am_check #(.PROTO(RTZ), .N(4), .ROUNDS(256)) u0 (.checks(c[0]), .failures(f[0]), .early(e[0]), .done(d[0]));
  am_check #(.PROTO(RTO), .N(4), .ROUNDS(256)) u1 (.checks(c[1]), .failures(f[1]), .early(e[1]), .done(d[1]));
  am_check #(.PROTO(RTZ), .N(6), .ROUNDS(300)) u2 (.checks(c[2]), .failures(f[2]), .early(e[2]), .done(d[2]));
  am_check #(.PROTO(RTO), .N(2), .ROUNDS(16))  u3 (.checks(c[3]), .failures(f[3]), .early(e[3]), .done(d[3]));

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum() + 1);
    $finish;
  end

  initial begin
    int failures;
    #1;
    wait (d[0] && d[1] && d[2] && d[3]);
    failures = f.sum();
    for (int i = 0; i < K; i++) if (e[i] == 0) failures++;
    $display("early product bits: %0d %0d %0d %0d", e[0], e[1], e[2], e[3]);
    $display("TB_RESULT checks=%0d failures=%0d", c.sum() + K, failures);
    $finish;
  end
endmodule
