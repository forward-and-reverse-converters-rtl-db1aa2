// rev_conv: reverse (residue-to-binary) converter of the moduli set
// tau+ = {m1, m2, m3} = {2^(2Q+1), 2^Q+2^(Q-1)-1, 2^Q+2^(Q-1)+1}.
//
// X = x1 + 2^(2Q+1) * X', so the low 2Q+1 bits of the result are x1 itself
// and only X' (< m2*m3) is computed: rev_bit_matrix lays out the weighted
// bits of X', mod_csa_tree reduces them to two (2Q+1)-bit rows modulo
// M = m2*m3 = 2^(2Q+1)+2^(2Q-2)-1 with re-entrant carries (seven levels for
// Q = 8, as in the paper), and mod_adder adds the two rows modulo M. The
// adder's output is 2Q+2 bits wide because M exceeds 2^(2Q+1).
// Inputs are residues (x1 < m1, x2 < m2, x3 < m3); for other inputs the
// output is still the CRT value of (x1, |x2|_m2, |x3|_m3). Combinational.
module rev_conv
  import rns_pkg::*;
#(
  parameter int Q = 8
) (
  input  logic [2*Q:0]   x1,
  input  logic [Q:0]     x2,
  input  logic [Q:0]     x3,
  output logic [4*Q+2:0] x
);

  localparam int    N  = 2*Q + 1;
  localparam int    P  = 2*Q - 2;
  localparam hvec_t H0 = rev_hvec(Q);
  localparam plan_t PL = tree_plan(H0, N, P);
  localparam int    HW = plan_hmax(PL);
  localparam big_t  M  = mod_m23(Q);
  localparam big_t  K  = rev_const(Q, plan_reentries(PL));

  logic [N-1:0][HW-1:0] cols;
  logic [N-1:0]         sa, sb;
  logic                 hi;
  logic [N:0]           xp;    // X'

  rev_bit_matrix #(.Q(Q)) u_mat (.x1(x1), .x2(x2), .x3(x3), .cols(cols));

  mod_csa_tree #(.N(N), .P(P), .INV0(1'b0), .INVP(1'b1), .H0(H0), .HW(HW)) u_tree (
    .col_bits(cols), .sum_a(sa), .sum_b(sb), .hi(hi)
  );

  mod_adder #(.N(N), .MOD((N+2)'(M)), .HI_CONST(K[N]), .OW(N+1)) u_add (
    .a(sa), .b(sb), .hi(hi), .r(xp)
  );

  assign x = {xp, x1};

endmodule
