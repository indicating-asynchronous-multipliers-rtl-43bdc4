// tb_indicating_multiplier_full: the multiplier stage exactly as
// delivered (default parameters: 4x4, RTO handshake) taken through all 256
// operand pairs by stage_env, with the same checks and mechanism counts as
// tb_indicating_multiplier.
module tb_indicating_multiplier_full
  import dr_pkg::*;
;
  logic      rst, ackout, rx_ackout;
  dr_t [3:0] a, b;
  dr_t [7:0] p;
  int        c, f, dt, st, sl, eb;
  logic      dn;

  indicating_multiplier dut (.rst(rst), .a(a), .b(b), .ackout(ackout), .p(p), .rx_ackout(rx_ackout));

  stage_env #(.PROTO(RTO), .N(4), .ROUNDS(256), .EXHAUSTIVE(1'b1)) env (
    .rst(rst), .a(a), .b(b), .ackout(ackout), .p(p), .rx_ackout(rx_ackout),
    .checks(c), .failures(f), .data_tokens(dt), .spacer_tokens(st),
    .stalls(sl), .early_bits(eb), .done(dn));

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c, f + 1);
    $finish;
  end

  initial begin
    int checks, failures;
    #1;
    wait (dn);
    checks = c + 4;
    failures = f + int'(dt != 256) + int'(st != 256) + int'(sl == 0) + int'(eb == 0);
    $display("data tokens %0d, spacer tokens %0d, stalls %0d, early product bits %0d", dt, st, sl, eb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
