// tb_tau_plus_rns: end-to-end test of the tau+ converters at their default
// size (Q = 8: moduli 2^17, 383, 385; 35-bit binary numbers).
//
// Random and corner operands a, b below the dynamic range D go through the
// top: the residues of a, the channel sums and the results a_back = a and
// z = |a+b|_D are compared with plain integer arithmetic. The test also
// counts how often the mechanisms of the design were exercised: carries
// re-entered inside the reduction trees, the last-level carry handed to a
// final adder, final adders subtracting one or more multiples of the
// modulus, and channel additions that wrapped around. A mechanism never
// seen counts as a failure.
module tb_tau_plus_rns;
  localparam int Q = 8;
  localparam int W = 4*Q + 3;
  localparam longint unsigned M1 = 64'd1 << (2*Q+1);
  localparam longint unsigned M2 = (64'd3 << (Q-1)) - 1;
  localparam longint unsigned M3 = (64'd3 << (Q-1)) + 1;
  localparam longint unsigned D  = M1 * M2 * M3;

  logic [W-1:0]  a, b, a_back, z;
  logic [2*Q:0]  ra1, rs1;
  logic [Q:0]    ra2, ra3, rs2, rs3;

  tau_plus_rns dut (.*);

  int checks = 0, failures = 0;
  int n_hi_fwd = 0, n_hi_rev = 0, n_sub_fwd = 0, n_sub_rev = 0, n_wrap = 0, n_reent = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%0d b=%0d", what, a, b);
    end
  endtask

  function automatic longint unsigned rnd_below(longint unsigned lim);
    longint unsigned v = {$urandom, $urandom};
    return v % lim;
  endfunction

  task automatic one(input longint unsigned av, input longint unsigned bv);
    a = W'(av);
    b = W'(bv);
    #1;
    check(ra1 == (2*Q+1)'(av % M1), "ra1");
    check(ra2 == (Q+1)'(av % M2), "ra2");
    check(ra3 == (Q+1)'(av % M3), "ra3");
    check(rs1 == (2*Q+1)'((av + bv) % M1), "rs1");
    check(rs2 == (Q+1)'((av + bv) % M2), "rs2");
    check(rs3 == (Q+1)'((av + bv) % M3), "rs3");
    check(a_back == W'(av), "a_back");
    check(z == W'((av + bv) % D), "z");
    // mechanism counters
    if (dut.u_fwd_a.u_m2.hi || dut.u_fwd_a.u_m3.hi) n_hi_fwd++;
    if (dut.u_rev_sum.hi) n_hi_rev++;
    if (dut.u_fwd_a.u_m2.u_add.t >= 12'(M2) || dut.u_fwd_a.u_m3.u_add.t >= 12'(M3)) n_sub_fwd++;
    if (dut.u_rev_sum.u_add.t >= 20'(M2*M3)) n_sub_rev++;
    if ((av % M2) + (bv % M2) >= M2) n_wrap++;
    if (dut.u_rev_sum.u_tree.g_lvl[0].carry[2*Q] != '0 || dut.u_rev_sum.u_tree.g_lvl[1].carry[2*Q] != '0 ||
        dut.u_rev_sum.u_tree.g_lvl[2].carry[2*Q] != '0 || dut.u_rev_sum.u_tree.g_lvl[3].carry[2*Q] != '0 ||
        dut.u_rev_sum.u_tree.g_lvl[4].carry[2*Q] != '0 || dut.u_rev_sum.u_tree.g_lvl[5].carry[2*Q] != '0)
      n_reent++;
  endtask

  initial begin
    one(0, 0);
    one(D-1, 0);
    one(D-1, D-1);
    one(1, D-1);
    one(M1-1, M1*M2*M3 - M1);
    for (int i = 0; i < 20000; i++) one(rnd_below(D), rnd_below(D));
    check(n_hi_fwd > 0, "forward last-level carry never seen");
    check(n_hi_rev > 0, "reverse last-level carry never seen");
    check(n_sub_fwd > 0, "forward adder correction never seen");
    check(n_sub_rev > 0, "reverse adder correction never seen");
    check(n_wrap > 0, "channel wrap never seen");
    check(n_reent > 0, "reverse re-entrant carry never seen");
    $display("mechanisms: fwd_hi=%0d rev_hi=%0d fwd_sub=%0d rev_sub=%0d wrap=%0d reentry=%0d",
             n_hi_fwd, n_hi_rev, n_sub_fwd, n_sub_rev, n_wrap, n_reent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
