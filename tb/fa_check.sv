// fa_check: exercises one weak-indication full adder in one protocol.
// Every input word is applied in every one of the six arrival orders.
// While inputs are missing the sum must stay spacer and a carry that is
// already data must be the right one (early carry is counted); once all
// three have arrived both outputs must be correct. The spacer then returns
// in the same order: the sum must stay data until the last input is
// spacer, and both outputs must end as spacer. No output may ever show the
// illegal code. With CIN_ZERO the adder's constant-carry form is tested:
// cin is held at the logic-0 code, only words with cin = 0 are used, and
// cin counts as the first input to arrive and the first to leave.
module fa_check
  import dr_pkg::*;
#(
  parameter protocol_e PROTO    = RTZ,
  parameter bit        CIN_ZERO = 1'b0
) (
  output int   checks,
  output int   failures,
  output int   early_carry,
  output logic done
);
  dr_t a, b, cin, sum, cout;
  dr_t in_bus [3];

  assign a = in_bus[0];
  assign b = in_bus[1];
  assign cin = in_bus[2];

  dr_full_adder #(.PROTO(PROTO), .CIN_ZERO(CIN_ZERO)) dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic fail(string what);
    failures++;
    $display("%s %s: a=%b b=%b c=%b sum=%b cout=%b", PROTO.name(), what, a, b, cin, sum, cout);
  endtask

  initial begin
    int unsigned perms[6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2}, '{1,2,0}, '{2,0,1}, '{2,1,0}};
    checks = 0; failures = 0; early_carry = 0; done = 1'b0;
    for (int i = 0; i < 3; i++) in_bus[i] = dr_spacer(PROTO);
    if (CIN_ZERO) in_bus[2] = dr_encode(PROTO, 1'b0);
    #1;
    for (int w = 0; w < 8; w++) begin
      for (int p = 0; p < 6; p++) begin
        logic [2:0] v;
        logic s_ref, c_ref;
        v = w[2:0];
        if (CIN_ZERO && (v[2] || perms[p][0] != 2)) continue;
        s_ref = ^v;
        c_ref = (v[0] & v[1]) | (v[0] & v[2]) | (v[1] & v[2]);
        for (int i = 0; i < 3; i++) begin
          if (!(CIN_ZERO && perms[p][i] == 2))
            in_bus[perms[p][i]] = dr_encode(PROTO, v[perms[p][i]]);
          #1;
          checks++;
          if (dr_is_illegal(PROTO, sum) || dr_is_illegal(PROTO, cout)) fail("illegal code");
          if (i < 2) begin
            checks += 2;
            if (!dr_is_spacer(PROTO, sum)) fail("sum before all inputs");
            if (dr_is_data(PROTO, cout)) begin
              early_carry++;
              if (dr_value(PROTO, cout) != c_ref) fail("wrong early carry");
            end
          end else begin
            checks++;
            if (sum !== dr_encode(PROTO, s_ref) || cout !== dr_encode(PROTO, c_ref)) fail("result");
          end
        end
        for (int i = 0; i < 3; i++) begin
          if (!(CIN_ZERO && perms[p][i] == 2))
            in_bus[perms[p][i]] = dr_spacer(PROTO);
          #1;
          checks++;
          if (i < 2) begin
            if (sum !== dr_encode(PROTO, s_ref)) fail("sum left data early");
          end else begin
            if (!dr_is_spacer(PROTO, sum) || !dr_is_spacer(PROTO, cout)) fail("not spacer");
          end
        end
      end
    end
    done = 1'b1;
  end
endmodule
