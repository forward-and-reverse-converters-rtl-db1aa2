// tb_rev_bit_matrix: the reverse converter's bit matrix for Q = 8.
// For random X below the dynamic range the residues (x1, x2, x3) are fed
// in, and the weighted sum of all matrix bits (bit k of column c weighs
// 2^c), plus 2^17 if the constant row overflowed, must equal
// X' = floor(X / 2^17) less 2^14 per carry the following tree re-enters,
// modulo M = 147455.
module tb_rev_bit_matrix;
  import rns_pkg::*;
  localparam int Q = 8;
  localparam int N = 2*Q + 1;
  localparam longint unsigned M1 = 131072, M2 = 383, M3 = 385, MM = 147455;
  localparam hvec_t H0 = rev_hvec(Q);
  localparam plan_t PL = tree_plan(H0, N, 2*Q-2);
  localparam int    HW = plan_hmax(PL);
  localparam int    RE = plan_reentries(PL);
  localparam big_t  K  = rev_const(Q, RE);

  logic [2*Q:0]        x1;
  logic [Q:0]          x2, x3;
  logic [N-1:0][HW-1:0] cols;

  rev_bit_matrix #(.Q(Q)) dut (.x1(x1), .x2(x2), .x3(x3), .cols(cols));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s x1=%0d x2=%0d x3=%0d", what, x1, x2, x3); end
  endtask

  initial begin
    longint unsigned v, s, xp;
    int nbits;
    nbits = 0;
    for (int c = 0; c < N; c++) nbits += int'(H0[c*8 +: 8]);
    $display("matrix bits (constant row included) = %0d, tree levels = %0d", nbits, plan_levels(PL));
    for (int i = 0; i < 20000; i++) begin
      v = (i == 0) ? 0 : (i == 1) ? M1*M2*M3 - 1 : {$urandom, $urandom} % (M1*M2*M3);
      x1 = (2*Q+1)'(v % M1);
      x2 = (Q+1)'(v % M2);
      x3 = (Q+1)'(v % M3);
      #1;
      s = longint'(K[N]) << N;
      for (int c = 0; c < N; c++)
        for (int k = 0; k < HW; k++) s += longint'(cols[c][k]) << c;
      xp = v / M1;
      check((s + (longint'(RE) << (2*Q-2))) % MM == xp, "matrix value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
