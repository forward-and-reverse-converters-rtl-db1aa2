// fwd_conv_mi: residue generator |X|_m for m = m2 = 2^Q+2^(Q-1)-1 (PLUS = 0)
// or m = m3 = 2^Q+2^(Q-1)+1 (PLUS = 1).
//
// The (4Q+3)-bit input is cut into X3 (Q bits), X2, X1 and X0 ((Q+1) bits
// each), X = 2^(3Q+3) X3 + 2^(2Q+2) X2 + 2^(Q+1) X1 + X0, so that
//   |X|_m = | F^3(X3) + F^2(X2) + F(X1) + X0 |_m,  F(Z) = |2^(Q+1) Z|_m.
// Three tables give F^3(X3), F^2(X2), F(X1); with X0 they form four
// (Q+1)-bit rows that a carry-save tree reduces to two rows modulo m, and
// a modular adder gives the residue. A carry out of bit Q has weight
// 2^(Q+1), worth 2^(Q-1)+1 modulo m2 and 2^(Q-1)-1 = 2^(Q-1) + ~c - 1
// modulo m3; the -1 of every re-entered m3 carry is folded into the F^3
// table. For Q = 8 the tree has three levels where the paper reports four.
// Combinational: table, tree, adder.
module fwd_conv_mi
  import rns_pkg::*;
#(
  parameter int Q    = 8,
  parameter bit PLUS = 1'b0
) (
  input  logic [4*Q+2:0] x,
  output logic [Q:0]     r
);

  localparam int    N   = Q + 1;
  localparam int    P   = Q - 1;
  localparam hvec_t H0  = const_hvec(N, 4);
  localparam plan_t PL  = tree_plan(H0, N, P);
  localparam int    HW  = plan_hmax(PL);
  localparam int    RE  = plan_reentries(PL);
  localparam big_t  M   = mod_mi(Q, PLUS);
  // m3: every re-entered carry leaves a -1 behind
  localparam big_t  ADD = PLUS ? (M - (big_t'(RE) % M)) % M : '0;

  logic [Q-1:0] x3;
  logic [Q:0]   x2, x1, x0;
  logic [Q:0]   f3, f2, f1;

  assign x3 = x[4*Q+2:3*Q+3];
  assign x2 = x[3*Q+2:2*Q+2];
  assign x1 = x[2*Q+1:Q+1];
  assign x0 = x[Q:0];

  fwd_lut #(.Q(Q), .PLUS(PLUS), .PW(3), .AW(Q),   .ADD(ADD)) u_f3 (.z(x3), .y(f3));
  fwd_lut #(.Q(Q), .PLUS(PLUS), .PW(2), .AW(Q+1), .ADD('0))  u_f2 (.z(x2), .y(f2));
  fwd_lut #(.Q(Q), .PLUS(PLUS), .PW(1), .AW(Q+1), .ADD('0))  u_f1 (.z(x1), .y(f1));

  logic [N-1:0][HW-1:0] cols;
  logic [N-1:0]         sa, sb;
  logic                 hi;

  always_comb begin
    cols = '0;
    for (int c = 0; c < N; c++) begin
      cols[c][0] = f3[c];
      cols[c][1] = f2[c];
      cols[c][2] = f1[c];
      cols[c][3] = x0[c];
    end
  end

  mod_csa_tree #(.N(N), .P(P), .INV0(PLUS), .INVP(1'b0), .H0(H0), .HW(HW)) u_tree (
    .col_bits(cols), .sum_a(sa), .sum_b(sb), .hi(hi)
  );

  mod_adder #(.N(N), .MOD((N+2)'(M)), .HI_CONST(1'b0), .OW(N)) u_add (
    .a(sa), .b(sb), .hi(hi), .r(r)
  );

endmodule
