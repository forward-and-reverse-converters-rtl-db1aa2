// fwd_conv: forward converter (residue generator) of the moduli set
// tau+ = {2^(2Q+1), 2^Q+2^(Q-1)-1, 2^Q+2^(Q-1)+1}.
//
// x is a (4Q+3)-bit binary number below the dynamic range
// 2^(4Q+2)+2^(4Q-1)-2^(2Q+1). The residue modulo 2^(2Q+1) is the low 2Q+1
// bits of x (no logic); the residues modulo m2 and m3 come from two
// fwd_conv_mi instances working in parallel. Combinational.
module fwd_conv #(
  parameter int Q = 8
) (
  input  logic [4*Q+2:0] x,
  output logic [2*Q:0]   r1,   // |x|_(2^(2Q+1))
  output logic [Q:0]     r2,   // |x|_(2^Q+2^(Q-1)-1)
  output logic [Q:0]     r3    // |x|_(2^Q+2^(Q-1)+1)
);

  assign r1 = x[2*Q:0];

  fwd_conv_mi #(.Q(Q), .PLUS(1'b0)) u_m2 (.x(x), .r(r2));
  fwd_conv_mi #(.Q(Q), .PLUS(1'b1)) u_m3 (.x(x), .r(r3));

endmodule
