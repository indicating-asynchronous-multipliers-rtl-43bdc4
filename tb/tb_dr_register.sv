// tb_dr_register: drives a 4-bit register bank with random rail values
// and random ACKIN and compares every rail with a C-element reference
// (rail passes when it equals ACKIN, else holds). Counts the steps where
// the bank had to hold a changed rail and requires some. The reset is
// applied at the start and a few times in the run (about 1 step in 50);
// it must force every rail to the RTO spacer level (1).
module tb_dr_register
  import dr_pkg::*;
;
  localparam int W = 4;
  dr_t [W-1:0] d, q;
  logic        ackin;
  logic [2*W-1:0] ref_q;
  int checks = 0, failures = 0, held = 0;

  logic        rst;
  int          resets = 0;

  dr_register #(.PROTO(RTO), .WIDTH(W)) dut (.rst(rst), .d(d), .ackin(ackin), .q(q));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0; ackin = 1'b0; rst = 1'b1;
    #1;
    checks++;
    if (q !== '1) begin
      failures++;
      $display("reset: q=%b", q);
    end
    d = '1; ackin = 1'b1;
    rst = 1'b0;
    ref_q = '1;
    #1;
    for (int t = 0; t < 3000; t++) begin
      d = (2*W)'($urandom);
      ackin = 1'($urandom);
      rst = ($urandom_range(49) == 0);
      if (rst) begin
        ref_q = '1;
        resets++;
      end else
      for (int i = 0; i < W; i++) begin
        if (d[i].r1 == ackin) ref_q[2*i+1] = ackin; else if (ref_q[2*i+1] != d[i].r1) held++;
        if (d[i].r0 == ackin) ref_q[2*i]   = ackin; else if (ref_q[2*i]   != d[i].r0) held++;
      end
      #1;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("d=%b ackin=%b q=%b expected %b", d, ackin, q, ref_q);
      end
    end
    checks++;
    if (held == 0) begin
      failures++;
      $display("holding never exercised");
    end
    checks++;
    if (resets == 0) begin
      failures++;
      $display("reset never applied in the run");
    end
    $display("held rails: %0d, resets: %0d", held, resets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
