// array_multiplier: N x N unsigned dual-rail array multiplier with no
// clock, built from strongly indicating ANDs and weak-indication full adders.
//
// Structure (N = 4 gives 16 ANDs and 12 full adders):
//   pp[i][j] = A[j] AND B[i], one dr_and2 per pair.
//   Row 1 (k = 1) adds A[j+1]B[0] and A[j]B[1] (j = 0..N-2) with a constant
//   carry in of logic 0.
//   Rows k = 2..N-1 are carry-save rows: adder (k,j) has weight j+k and adds
//   A[j]B[k], the sum of adder (k-1,j+1) (for the leftmost adder: the
//   partial product A[N-1]B[k-1]) and the carry of adder (k-1,j).
//   Row N is a ripple-carry row: adder (N,j) adds the sum of (N-1,j+1)
//   (leftmost: A[N-1]B[N-1]), the carry of (N-1,j) and the carry of (N,j-1);
//   its first adder takes the constant logic-0 carry in.
//   P[0] = A[0]B[0]; P[k] = sum of adder (k,0) for k = 1..N-1;
//   P[N+j] = sum of adder (N,j); P[2N-1] = carry of adder (N,N-2).
// So N adders have a constant carry in of logic 0. Its code is
// (r1,r0) = (0,1) in RTZ and (1,0) in RTO: the true rail is tied to 0 in
// RTZ and to 1 in RTO. Those adders are built with CIN_ZERO set, which
// propagates the constant through their gates (see dr_full_adder); they
// then indicate only their two live inputs, and lint reports their cin
// port as unused, which is intended.
//
// The array, the adder count, the constant carries and the partial product
// placement follow the paper's 4x4 array; the generalisation to N and
// the adder netlist (see dr_full_adder) are this design's. Timing: every
// product bit becomes data only after the operands it depends on; the
// whole product becomes data (spacer) only after every operand bit has,
// which the completion detector downstream relies on.
// The Verilator linter reports the carry array co as circular logic,
// because it treats the whole array as one signal (adder (N,j) reads the
// carry of (N,j-1)); apart from the hold feedback inside each C-element
// the array has no loop.
module array_multiplier
  import dr_pkg::*;
#(
  parameter protocol_e   PROTO = RTO,
  parameter int unsigned N     = 4
) (
  input  dr_t [N-1:0]   a,
  input  dr_t [N-1:0]   b,
  output dr_t [2*N-1:0] p
);

  localparam dr_t ZERO = dr_encode(PROTO, 1'b0);

  dr_t pp [N][N];          // pp[i][j] = A[j] B[i]
  dr_t s  [1:N][N-1];      // sum  of adder (k,j)
  dr_t co [1:N][N-1];      // carry of adder (k,j)

  for (genvar i = 0; i < N; i++) begin : g_row_pp
    for (genvar j = 0; j < N; j++) begin : g_col_pp
      dr_and2 #(.PROTO(PROTO)) u_and (.x(a[j]), .y(b[i]), .z(pp[i][j]));
    end
  end

  for (genvar k = 1; k <= N; k++) begin : g_row
    for (genvar j = 0; j < N-1; j++) begin : g_col
      localparam bit CONST_CIN = (k == 1) || (k == N && j == 0);
      dr_t fa_a, fa_b, fa_c;
      if (k == 1) begin : g_first
        assign fa_a = pp[0][j+1];
        assign fa_b = pp[1][j];
        assign fa_c = ZERO;
      end else if (k < N) begin : g_csa
        assign fa_a = pp[k][j];
        assign fa_b = (j == N-2) ? pp[k-1][N-1] : s[k-1][j+1];
        assign fa_c = co[k-1][j];
      end else begin : g_ripple
        assign fa_a = (j == N-2) ? pp[N-1][N-1] : s[N-1][j+1];
        assign fa_b = co[N-1][j];
        assign fa_c = (j == 0) ? ZERO : co[N][(j == 0) ? 0 : j-1];
      end
      dr_full_adder #(.PROTO(PROTO), .CIN_ZERO(CONST_CIN)) u_fa (
        .a(fa_a), .b(fa_b), .cin(fa_c), .sum(s[k][j]), .cout(co[k][j])
      );
    end
  end

  assign p[0] = pp[0][0];
  for (genvar k = 1; k < N; k++) begin : g_p_low
    assign p[k] = s[k][0];
  end
  for (genvar j = 0; j < N-1; j++) begin : g_p_high
    assign p[N+j] = s[N][j];
  end
  assign p[2*N-1] = co[N][N-2];

endmodule
