// tb_rns_channel_add: channel-wise modular addition for Q = 8 on random
// residues and on the largest ones (m-1 + m-1).
module tb_rns_channel_add;
  localparam int Q = 8;
  localparam int unsigned M1 = 131072, M2 = 383, M3 = 385;

  logic [2*Q:0] a1, b1, z1;
  logic [Q:0]   a2, b2, z2, a3, b3, z3;

  rns_channel_add #(.Q(Q)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic one(input int unsigned u1, v1, u2, v2, u3, v3);
    a1 = (2*Q+1)'(u1); b1 = (2*Q+1)'(v1);
    a2 = (Q+1)'(u2);   b2 = (Q+1)'(v2);
    a3 = (Q+1)'(u3);   b3 = (Q+1)'(v3);
    #1;
    check(z1 == (2*Q+1)'((u1 + v1) % M1), "m1");
    check(z2 == (Q+1)'((u2 + v2) % M2), "m2");
    check(z3 == (Q+1)'((u3 + v3) % M3), "m3");
  endtask

  initial begin
    one(M1-1, M1-1, M2-1, M2-1, M3-1, M3-1);
    one(0, 0, 0, 0, 0, 0);
    for (int i = 0; i < 20000; i++)
      one($urandom % M1, $urandom % M1, $urandom % M2, $urandom % M2, $urandom % M3, $urandom % M3);
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
