// am_check: exercises one array multiplier (no registers) in one protocol.
// For every operand pair (or ROUNDS random pairs when the operand space is
// larger than that) the 2N operand bits arrive one at a time in a random
// order. Before the last one arrives the product must not be complete
// data, and a product bit that is already data must already hold its final
// value; after the last one the product must equal A*B. The spacer then
// returns bit by bit: the product must not be all spacer before the last
// operand bit is spacer, and must be all spacer after it. Product bits
// that became data before the last operand bit are counted as early
// outputs (weak indication).
module am_check
  import dr_pkg::*;
#(
  parameter protocol_e   PROTO  = RTZ,
  parameter int unsigned N      = 4,
  parameter int unsigned ROUNDS = 256
) (
  output int   checks,
  output int   failures,
  output int   early,
  output logic done
);
  localparam int unsigned W = 2 * N;
  dr_t [N-1:0] a, b;
  dr_t [W-1:0] p;
  dr_t [W-1:0] opnd;

  assign a = opnd[N-1:0];
  assign b = opnd[W-1:N];

  array_multiplier #(.PROTO(PROTO), .N(N)) dut (.a(a), .b(b), .p(p));

  function automatic logic all_data(dr_t [W-1:0] v);
    for (int i = 0; i < W; i++) if (!dr_is_data(PROTO, v[i])) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic all_spacer(dr_t [W-1:0] v);
    for (int i = 0; i < W; i++) if (!dr_is_spacer(PROTO, v[i])) return 1'b0;
    return 1'b1;
  endfunction

  task automatic shuffle(ref int unsigned order[W]);
    for (int i = 0; i < W; i++) order[i] = i;
    for (int i = W-1; i > 0; i--) begin
      int unsigned j = $urandom_range(i);
      int unsigned t = order[i];
      order[i] = order[j];
      order[j] = t;
    end
  endtask

  initial begin
    int unsigned order[W];
    logic [N-1:0] va, vb;
    logic [W-1:0] vp, vops;
    checks = 0; failures = 0; early = 0; done = 1'b0;
    for (int i = 0; i < W; i++) opnd[i] = dr_spacer(PROTO);
    #1;
    for (int r = 0; r < ROUNDS; r++) begin
      if (ROUNDS == (1 << W)) vops = W'(r); else vops = W'($urandom);
      va = vops[N-1:0];
      vb = vops[W-1:N];
      vp = W'(va) * W'(vb);
      shuffle(order);
      for (int i = 0; i < W; i++) begin
        opnd[order[i]] = dr_encode(PROTO, vops[order[i]]);
        #1;
        for (int k = 0; k < W; k++) begin
          checks++;
          if (dr_is_illegal(PROTO, p[k]) ||
              (dr_is_data(PROTO, p[k]) && dr_value(PROTO, p[k]) != vp[k])) begin
            failures++;
            $display("%s N=%0d %0d*%0d: bit %0d wrong after %0d operand bits", PROTO.name(), N, va, vb, k, i+1);
          end
          if (i < W-1 && dr_is_data(PROTO, p[k])) early++;
        end
        checks++;
        if ((i < W-1) == all_data(p)) begin
          failures++;
          $display("%s N=%0d %0d*%0d: completion %b after %0d of %0d operand bits",
                   PROTO.name(), N, va, vb, all_data(p), i+1, W);
        end
      end
      shuffle(order);
      for (int i = 0; i < W; i++) begin
        opnd[order[i]] = dr_spacer(PROTO);
        #1;
        checks++;
        if ((i < W-1) == all_spacer(p)) begin
          failures++;
          $display("%s N=%0d %0d*%0d: spacer %b after %0d of %0d operand bits",
                   PROTO.name(), N, va, vb, all_spacer(p), i+1, W);
        end
      end
    end
    done = 1'b1;
  end
endmodule
