// tb_indicating_multiplier: end-to-end runs of the multiplier stage.
// RTZ and RTO 4x4 stages see every operand pair (256 each) through the
// full four-phase handshake with a randomly slow receiver; a 5x5 RTZ stage
// sees random pairs. Every counted mechanism (data tokens, spacer tokens,
// stalls, early product bits) must occur in every run.
module tb_indicating_multiplier
  import dr_pkg::*;
;
  localparam int K = 3;
  int   c[K], f[K], dt[K], st[K], sl[K], eb[K];
  logic dn[K];

  logic         rst0, rst1, rst2;
  dr_t [3:0]    a0, b0, a1, b1;
  dr_t [4:0]    a2, b2;
  dr_t [7:0]    p0, p1;
  dr_t [9:0]    p2;
  logic         ack0, ack1, ack2, rx0, rx1, rx2;

  indicating_multiplier #(.PROTO(RTZ), .N(4)) dut0 (.rst(rst0), .a(a0), .b(b0), .ackout(ack0), .p(p0), .rx_ackout(rx0));
  indicating_multiplier #(.PROTO(RTO), .N(4)) dut1 (.rst(rst1), .a(a1), .b(b1), .ackout(ack1), .p(p1), .rx_ackout(rx1));
  indicating_multiplier #(.PROTO(RTZ), .N(5)) dut2 (.rst(rst2), .a(a2), .b(b2), .ackout(ack2), .p(p2), .rx_ackout(rx2));

  stage_env #(.PROTO(RTZ), .N(4), .ROUNDS(256), .EXHAUSTIVE(1'b1)) env0 (
    .rst(rst0), .a(a0), .b(b0), .ackout(ack0), .p(p0), .rx_ackout(rx0),
    .checks(c[0]), .failures(f[0]), .data_tokens(dt[0]), .spacer_tokens(st[0]),
    .stalls(sl[0]), .early_bits(eb[0]), .done(dn[0]));
  stage_env #(.PROTO(RTO), .N(4), .ROUNDS(256), .EXHAUSTIVE(1'b1)) env1 (
    .rst(rst1), .a(a1), .b(b1), .ackout(ack1), .p(p1), .rx_ackout(rx1),
    .checks(c[1]), .failures(f[1]), .data_tokens(dt[1]), .spacer_tokens(st[1]),
    .stalls(sl[1]), .early_bits(eb[1]), .done(dn[1]));
  stage_env #(.PROTO(RTZ), .N(5), .ROUNDS(300), .EXHAUSTIVE(1'b0)) env2 (
    .rst(rst2), .a(a2), .b(b2), .ackout(ack2), .p(p2), .rx_ackout(rx2),
    .checks(c[2]), .failures(f[2]), .data_tokens(dt[2]), .spacer_tokens(st[2]),
    .stalls(sl[2]), .early_bits(eb[2]), .done(dn[2]));

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum() + 1);
    $finish;
  end

  initial begin
    int checks, failures;
    #1;
    wait (dn[0] && dn[1] && dn[2]);
    checks = c.sum();
    failures = f.sum();
    for (int i = 0; i < K; i++) begin
      $display("run %0d: data tokens %0d, spacer tokens %0d, stalls %0d, early product bits %0d",
               i, dt[i], st[i], sl[i], eb[i]);
      checks += 4;
      if (dt[i] == 0) failures++;
      if (st[i] == 0) failures++;
      if (sl[i] == 0) failures++;
      if (eb[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
