// tb_kadd_chain: the sequence the converters are meant for - one forward
// conversion per operand, k modular additions in residue form, one reverse
// conversion at the end - for k = 39 and k = 100 at Q = 8. The residue sum
// is accumulated through the channel adder (one addition per step, fed back
// by the testbench) and the reverse-converted result must equal the sum of
// the k+1 operands modulo the dynamic range D = 2^17*383*385.
module tb_kadd_chain;
  localparam int Q = 8;
  localparam int W = 4*Q + 3;
  localparam longint unsigned D = 64'd131072 * 383 * 385;

  logic [W-1:0] x;
  logic [2*Q:0] r1, acc1, z1;
  logic [Q:0]   r2, r3, acc2, acc3, z2, z3;
  logic [W-1:0] y;

  fwd_conv        #(.Q(Q)) u_fwd (.x(x), .r1(r1), .r2(r2), .r3(r3));
  rns_channel_add #(.Q(Q)) u_add (.a1(acc1), .b1(r1), .a2(acc2), .b2(r2), .a3(acc3), .b3(r3),
                                  .z1(z1), .z2(z2), .z3(z3));
  rev_conv        #(.Q(Q)) u_rev (.x1(acc1), .x2(acc2), .x3(acc3), .x(y));

  int checks = 0, failures = 0;
  int additions = 0;

  task automatic chain(input int k);
    longint unsigned v, ref_sum;
    v = {$urandom, $urandom} % D;
    x = W'(v);
    #1;
    acc1 = r1; acc2 = r2; acc3 = r3;
    ref_sum = v;
    for (int i = 0; i < k; i++) begin
      v = {$urandom, $urandom} % D;
      x = W'(v);
      #1;
      acc1 = z1; acc2 = z2; acc3 = z3;
      additions++;
      ref_sum = (ref_sum + v) % D;
    end
    #1;
    checks++;
    if (y != W'(ref_sum)) begin
      failures++;
      if (failures < 10) $display("FAIL k=%0d got %0d expected %0d", k, y, ref_sum);
    end
  endtask

  initial begin
    for (int n = 0; n < 200; n++) chain(39);
    for (int n = 0; n < 200; n++) chain(100);
    $display("chains: 200 of k=39, 200 of k=100, %0d residue additions", additions);
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
