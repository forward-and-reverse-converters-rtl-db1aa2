// fwd_lut: residue look-up table of the forward converter.
//
// y = | 2^(PW*(Q+1)) * z + ADD |_m,   m = 2^Q + 2^(Q-1) - 1 (PLUS = 0)
//                                     or 2^Q + 2^(Q-1) + 1 (PLUS = 1)
//
// With PW = 1, 2, 3 this is the paper's F_i, F_i^2 and F_i^3: the residue
// of the (Q+1)-bit slices X1, X2 and the Q-bit slice X3 of the binary input
// at their weights 2^(q+1), 2^(2q+2) and 2^(3q+3). F_i^2 and F_i^3 are
// stored as single tables of the composed function, as in the paper, not
// as chained F_i tables. ADD folds a constant into the table; the forward
// converter uses it for the correction of its inverted re-entrant carries.
// The 2^AW entries are computed while the design elaborates (no data file)
// and read combinationally; a synthesis tool turns them into a ROM or logic.
module fwd_lut
  import rns_pkg::*;
#(
  parameter int   Q    = 8,
  parameter bit   PLUS = 1'b0,
  parameter int   PW   = 1,
  parameter int   AW   = Q + 1,
  parameter big_t ADD  = '0
) (
  input  logic [AW-1:0] z,
  output logic [Q:0]    y
);

  logic [Q:0] rom [2**AW];

  for (genvar i = 0; i < 2**AW; i++) begin : g_rom
    localparam big_t V = fwd_lut_val(Q, PLUS, PW, ADD, big_t'(i));
    assign rom[i] = V[Q:0];
  end

  assign y = rom[z];

endmodule
