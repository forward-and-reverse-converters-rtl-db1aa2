// tb_mod_csa_tree: the modular carry-save tree on random bit matrices.
// Three trees are built: the four-row tree of the forward converter for
// m2 = 383 (re-entry c at columns 0 and 7) and for m3 = 385 (~c at 0, c at
// 7, -1 per re-entered carry), and the reverse converter's tree for
// M = 147455 (c at 0, ~c at 14, -2^14 per carry) with the reverse
// matrix's column heights. For each, the value of the matrix must equal
// sum_a + sum_b + 2^N*hi less the constants the re-entered carries
// leave (+1 each for m3, +2^14 each for the reverse tree), modulo the
// modulus. The number of levels is printed (the paper: 4 for
// the forward trees, 7 for the reverse tree) and the reverse one checked.
module tb_mod_csa_tree;
  import rns_pkg::*;
  localparam int Q = 8;
  localparam hvec_t HF = const_hvec(Q+1, 4);
  localparam plan_t PF = tree_plan(HF, Q+1, Q-1);
  localparam int    HWF = plan_hmax(PF);
  localparam hvec_t HR = rev_hvec(Q);
  localparam plan_t PR = tree_plan(HR, 2*Q+1, 2*Q-2);
  localparam int    HWR = plan_hmax(PR);

  logic [Q:0][HWF-1:0]   cf;
  logic [2*Q:0][HWR-1:0] cr;
  logic [Q:0]   sa2, sb2, sa3, sb3;
  logic [2*Q:0] sar, sbr;
  logic hi2, hi3, hir;

  mod_csa_tree #(.N(Q+1), .P(Q-1), .INV0(1'b0), .INVP(1'b0), .H0(HF)) u2 (.col_bits(cf), .sum_a(sa2), .sum_b(sb2), .hi(hi2));
  mod_csa_tree #(.N(Q+1), .P(Q-1), .INV0(1'b1), .INVP(1'b0), .H0(HF)) u3 (.col_bits(cf), .sum_a(sa3), .sum_b(sb3), .hi(hi3));
  mod_csa_tree #(.N(2*Q+1), .P(2*Q-2), .INV0(1'b0), .INVP(1'b1), .H0(HR)) ur (.col_bits(cr), .sum_a(sar), .sum_b(sbr), .hi(hir));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    longint unsigned vf, vr, m2, m3, mr;
    int ref_f, ref_r;
    m2 = 383; m3 = 385; mr = 147455;
    ref_f = plan_reentries(PF);
    ref_r = plan_reentries(PR);
    $display("levels: forward %0d (re-entered carries %0d), reverse %0d (re-entered carries %0d)",
             plan_levels(PF), ref_f, plan_levels(PR), ref_r);
    check(plan_levels(PR) == 7, "reverse tree has 7 levels");
    for (int it = 0; it < 20000; it++) begin
      vf = 0; vr = 0;
      for (int c = 0; c <= Q; c++)
        for (int k = 0; k < HWF; k++) begin
          cf[c][k] = (k < int'(HF[c*8 +: 8])) ? 1'($urandom) : 1'b0;
          vf += longint'(cf[c][k]) << c;
        end
      for (int c = 0; c <= 2*Q; c++)
        for (int k = 0; k < HWR; k++) begin
          cr[c][k] = (k < int'(HR[c*8 +: 8])) ? ((it < 2) ? 1'(it) : 1'($urandom)) : 1'b0;
          vr += longint'(cr[c][k]) << c;
        end
      #1;
      check((longint'(sa2) + longint'(sb2) + (longint'(hi2) << (Q+1))) % m2 == vf % m2, "m2 tree");
      check((longint'(sa3) + longint'(sb3) + (longint'(hi3) << (Q+1))) % m3 == (vf + longint'(ref_f)) % m3, "m3 tree");
      check((longint'(sar) + longint'(sbr) + (longint'(hir) << (2*Q+1))) % mr == (vr + (longint'(ref_r) << (2*Q-2))) % mr,
            "m2m3 tree");
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
