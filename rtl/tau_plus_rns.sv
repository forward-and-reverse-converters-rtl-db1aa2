// tau_plus_rns: forward conversion, one residue addition and reverse
// conversion in the moduli set tau+ = {2^(2Q+1), 2^Q+2^(Q-1)-1,
// 2^Q+2^(Q-1)+1}, the operation sequence the converters are meant for.
//
// a and b are (4Q+3)-bit binary numbers below the dynamic range
// D = 2^(4Q+2)+2^(4Q-1)-2^(2Q+1). Both are converted to residues (fwd_conv),
// added channel by channel (rns_channel_add) and converted back (rev_conv):
//   z = |a + b|_D.
// The residues of a and of the sum are also brought out, and a separate
// reverse conversion of a's residues gives a_back = a (a round trip through
// the forward and reverse converters). Combinational, no clock.
module tau_plus_rns #(
  parameter int Q = 8
) (
  input  logic [4*Q+2:0] a,
  input  logic [4*Q+2:0] b,
  output logic [2*Q:0]   ra1,
  output logic [Q:0]     ra2,
  output logic [Q:0]     ra3,
  output logic [2*Q:0]   rs1,
  output logic [Q:0]     rs2,
  output logic [Q:0]     rs3,
  output logic [4*Q+2:0] a_back,
  output logic [4*Q+2:0] z
);

  logic [2*Q:0] rb1;
  logic [Q:0]   rb2, rb3;

  fwd_conv #(.Q(Q)) u_fwd_a (.x(a), .r1(ra1), .r2(ra2), .r3(ra3));
  fwd_conv #(.Q(Q)) u_fwd_b (.x(b), .r1(rb1), .r2(rb2), .r3(rb3));

  rns_channel_add #(.Q(Q)) u_add (
    .a1(ra1), .b1(rb1), .a2(ra2), .b2(rb2), .a3(ra3), .b3(rb3),
    .z1(rs1), .z2(rs2), .z3(rs3)
  );

  rev_conv #(.Q(Q)) u_rev_sum (.x1(rs1), .x2(rs2), .x3(rs3), .x(z));
  rev_conv #(.Q(Q)) u_rev_a   (.x1(ra1), .x2(ra2), .x3(ra3), .x(a_back));

endmodule
