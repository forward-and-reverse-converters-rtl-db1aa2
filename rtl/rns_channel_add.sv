// rns_channel_add: one modular addition in each of the three residue
// channels of tau+: z1 = |a1+b1|_(2^(2Q+1)) (plain (2Q+1)-bit addition,
// carry dropped), z2 = |a2+b2|_m2, z3 = |a3+b3|_m3. The m2 and m3 channels
// reuse mod_adder with hi = 0; the paper takes parallel-prefix adders for
// these channels from earlier work and only counts their delay.
// Inputs must be residues. Combinational.
module rns_channel_add
  import rns_pkg::*;
#(
  parameter int Q = 8
) (
  input  logic [2*Q:0] a1, b1,
  input  logic [Q:0]   a2, b2,
  input  logic [Q:0]   a3, b3,
  output logic [2*Q:0] z1,
  output logic [Q:0]   z2,
  output logic [Q:0]   z3
);

  assign z1 = a1 + b1;

  mod_adder #(.N(Q+1), .MOD((Q+3)'(mod_mi(Q, 1'b0))), .HI_CONST(1'b0), .OW(Q+1)) u_m2 (
    .a(a2), .b(b2), .hi(1'b0), .r(z2)
  );
  mod_adder #(.N(Q+1), .MOD((Q+3)'(mod_mi(Q, 1'b1))), .HI_CONST(1'b0), .OW(Q+1)) u_m3 (
    .a(a3), .b(b3), .hi(1'b0), .r(z3)
  );

endmodule
