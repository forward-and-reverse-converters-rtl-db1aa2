// mod_adder: final modular adder that turns a carry-save pair into a residue.
//
// r = | a + b + 2^N * (hi + HI_CONST) |_MOD
//
// a and b are any N-bit values (they need not be residues: they come out of
// a carry-save tree), hi is the tree's last carry out of the top column and
// HI_CONST a constant 0/1 for a matrix constant that did not fit N columns.
// The raw sum T is formed once; in parallel T is compared with every
// multiple k*MOD that it can reach, and the largest multiple not above T
// is subtracted. This is the plain "compute sum and sum-minus-modulus and
// select" scheme of modular adders, widened to as many multiples as the
// input range needs (up to four when MOD is about 0.75*2^N). The paper uses
// a parallel-prefix modular adder here whose insides it does not give.
//
// Used for the (q+1)-bit modulo-m_i adder of the forward converter, for the
// modulo-(2^(2q+1)+2^(2q-2)-1) adder of the reverse converter and, with
// residue inputs and hi = 0, as the channel adder. Combinational.
module mod_adder #(
  parameter int          N        = 9,
  parameter logic [N+1:0] MOD     = (N+2)'(383),
  parameter bit          HI_CONST = 1'b0,
  parameter int          OW       = N + 1
) (
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  input  logic          hi,
  output logic [OW-1:0] r
);

  localparam int TW = N + 3;
  // largest value T can take
  localparam logic [TW-1:0] TMAX = (TW'(3 + int'(HI_CONST)) << N) - TW'(2);
  localparam logic [TW-1:0] KQ   = TMAX / TW'(MOD);
  localparam int            KMAX = int'(KQ);

  logic [TW-1:0] t;
  logic [OW-1:0] res;

  assign t = TW'(a) + TW'(b) + (TW'(hi) << N) + (TW'(HI_CONST) << N);

  always_comb begin
    res = OW'(t);
    for (int k = 1; k <= KMAX; k++) begin
      if (t >= TW'(k) * TW'(MOD)) res = OW'(t - TW'(k) * TW'(MOD));
    end
  end

  assign r = res;

endmodule
