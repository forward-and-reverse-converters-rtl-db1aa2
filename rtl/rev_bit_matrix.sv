// rev_bit_matrix: the weighted-bit operand matrix of the reverse converter.
//
// With M = m2*m3 = 2^(2Q+1)+2^(2Q-2)-1, the upper part of the result is
//   X' = | A*x2 + B*x3 - mu1*x1 |_M ,
//   mu1 = 9*2^(2Q-5)+1, mu2 = 3*2^(Q-2), A = mu1*mu2*m3, B = mu1 - A,
// which is the paper's two New-CRT steps (on {m2,m3}, then on {m1,m2*m3})
// merged into one sum. The weight W = |coef*2^i|_M of every input bit b
// (or -(M-W)) is written in signed binary digits, plain or non-adjacent
// form, whichever has the fewest; a digit +2^j puts b in column j, a digit
// -2^j puts ~b in column j and leaves the constant -2^j. For Q = 8 this
// gives 152 bits plus the constant row, at most 12 per column, and the
// tree after it has 7 levels. All constants (those of the inverted bits and the -2^(2Q-2) left
// by each carry the tree re-enters) are summed modulo M into one constant
// row, the last bit of every column. If that constant does not fit 2Q+1
// bits, its bit 2Q+1 is left to the final adder (rev_conv passes it on).
// This is the counterpart of the paper's Table I (thirteen rows built from
// its Eq. (9)); the bit placement here is computed from the weights rather
// than copied from the table. Pure wiring, inverters and constants.
module rev_bit_matrix
  import rns_pkg::*;
#(
  parameter int Q = 8,
  localparam int N = 2*Q + 1,
  localparam hvec_t H0 = rev_hvec(Q),
  localparam plan_t PL = tree_plan(H0, N, 2*Q-2),
  localparam int HW = plan_hmax(PL),
  localparam big_t K = rev_const(Q, plan_reentries(PL))
) (
  input  logic [2*Q:0]          x1,
  input  logic [Q:0]            x2,
  input  logic [Q:0]            x3,
  output logic [N-1:0][HW-1:0]  cols
);

  localparam rtab_t TAB = rev_table(Q);

  logic [4*Q+2:0] src;   // x2, x3, x1 in source order
  assign src = {x1, x3, x2};

  for (genvar c = 0; c < N; c++) begin : g_col
    localparam int H = int'(H0[c*8 +: 8]);
    for (genvar k = 0; k < H - 1; k++) begin : g_bit
      localparam int S = rev_src(TAB, Q, c, k);
      assign cols[c][k] = src[S/2] ^ 1'(S % 2);
    end
    assign cols[c][H-1] = K[c];
    for (genvar k = H; k < HW; k++) begin : g_pad
      assign cols[c][k] = 1'b0;
    end
  end

endmodule
