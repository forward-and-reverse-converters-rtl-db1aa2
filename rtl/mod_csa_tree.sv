// mod_csa_tree: carry-save reduction of a bit matrix modulo a number of the
// form M = 2^N - delta, with re-entrant carries.
//
// The input is a matrix of bits in N columns (column c has weight 2^c);
// column c holds H0[c] bits, packed from index 0 upward in col_bits[c].
// Levels of full adders (3:2) and half adders (2:2) reduce every column to
// at most two bits, Dadda fashion: each level aims at the next height of
// 2,3,4,6,9,13,19,... A carry that leaves the top column has weight 2^N,
// which is congruent to delta modulo M; it is put back into the next level
// as one bit in column 0 and one bit in column P, each either true or
// inverted (INV0, INVP). The constant that an inverted copy implies is not
// added here: whoever builds the matrix adds it in advance (the number of
// re-entered carries is rns_pkg::plan_reentries of the tree's plan).
//   m2 = 2^(q+1) - (2^(q-1)+1): c at 0, c at q-1
//   m3 = 2^(q+1) - (2^(q-1)-1): ~c at 0, c at q-1, constant -1 per carry
//   m2*m3 = 2^(2q+1) - (2^(2q-2)-1): c at 0, ~c at 2q-2, -2^(2q-2) per carry
// The last level's carry out of the top column cannot re-enter without a
// further level, so it is output as `hi` (weight 2^N) for the final adder.
//
// The result satisfies  sum_a + sum_b + 2^N*hi  ==  matrix value + the
// implied constants  (mod M).
//
// Purely combinational. The level structure is decided at elaboration by
// rns_pkg::tree_plan; LEVELS reports how many levels were built.
// The carry array of a level is sized for the tallest column, so its rows
// above a column's adder count are tied to zero and, with the top column's
// carries in the last level other than `hi`, stay unread (lint reports
// them as unused bits; they cost no logic).
module mod_csa_tree
  import rns_pkg::*;
#(
  parameter int    N    = 9,
  parameter int    P    = 7,
  parameter bit    INV0 = 1'b0,
  parameter bit    INVP = 1'b0,
  parameter hvec_t H0   = const_hvec(9, 4),
  parameter int    HW   = plan_hmax(tree_plan(H0, N, P))
) (
  input  logic [N-1:0][HW-1:0] col_bits,
  output logic [N-1:0]         sum_a,
  output logic [N-1:0]         sum_b,
  output logic                 hi
);

  localparam plan_t PL     = tree_plan(H0, N, P);
  localparam int    LEVELS = plan_levels(PL);

  // lv[L] is the input of level L; lv[LEVELS] is the final two-row result.
  logic [N-1:0][HW-1:0] lv [LEVELS+1];

  assign lv[0] = col_bits;

  for (genvar L = 0; L < LEVELS; L++) begin : g_lvl
    localparam bit LAST = (L == LEVELS-1);
    // carries out of the top column in this level
    localparam int TOPC = plan_fa(PL, L, N-1) + plan_ha(PL, L, N-1);
    logic [N-1:0][HW-1:0] carry;   // carry[c][j]: j-th carry out of column c

    for (genvar c = 0; c < N; c++) begin : g_col
      localparam int H   = plan_h(PL, L, c);
      localparam int F   = plan_fa(PL, L, c);
      localparam int A   = plan_ha(PL, L, c);
      localparam int PS  = H - 3*F - 2*A;                 // bits passed on
      localparam int CIN = (c == 0) ? 0 :
                           plan_fa(PL, L, c-1) + plan_ha(PL, L, c-1);
      localparam int RE0 = (!LAST && c == 0) ? TOPC : 0;  // re-entered, column 0
      localparam int REP = (!LAST && c == P) ? TOPC : 0;  // re-entered, column P
      localparam int OUTH = F + A + PS + CIN + RE0 + REP;

      for (genvar j = 0; j < F; j++) begin : g_fa
        logic x, y, z;
        assign x = lv[L][c][3*j];
        assign y = lv[L][c][3*j+1];
        assign z = lv[L][c][3*j+2];
        assign lv[L+1][c][j] = x ^ y ^ z;
        assign carry[c][j]   = (x & y) | (x & z) | (y & z);
      end
      for (genvar j = 0; j < A; j++) begin : g_ha
        logic x, y;
        assign x = lv[L][c][3*F+2*j];
        assign y = lv[L][c][3*F+2*j+1];
        assign lv[L+1][c][F+j] = x ^ y;
        assign carry[c][F+j]   = x & y;
      end
      for (genvar j = 0; j < PS; j++) begin : g_pass
        assign lv[L+1][c][F+A+j] = lv[L][c][3*F+2*A+j];
      end
      for (genvar j = 0; j < CIN; j++) begin : g_cin
        assign lv[L+1][c][F+A+PS+j] = carry[c-1][j];
      end
      for (genvar j = 0; j < RE0; j++) begin : g_re0
        assign lv[L+1][c][F+A+PS+CIN+j] = carry[N-1][j] ^ INV0;
      end
      for (genvar j = 0; j < REP; j++) begin : g_rep
        assign lv[L+1][c][F+A+PS+CIN+RE0+j] = carry[N-1][j] ^ INVP;
      end
      for (genvar j = OUTH; j < HW; j++) begin : g_zero
        assign lv[L+1][c][j] = 1'b0;
      end
      for (genvar j = F + A; j < HW; j++) begin : g_nocarry
        assign carry[c][j] = 1'b0;
      end
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_out
    assign sum_a[c] = lv[LEVELS][c][0];
    assign sum_b[c] = lv[LEVELS][c][1];
  end

  // at most one carry leaves the top column in the last level
  if (plan_fa(PL, LEVELS-1, N-1) + plan_ha(PL, LEVELS-1, N-1) > 0) begin : g_hi
    assign hi = g_lvl[LEVELS-1].carry[N-1][0];
  end else begin : g_nohi
    assign hi = 1'b0;
  end

endmodule
