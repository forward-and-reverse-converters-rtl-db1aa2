// tb_rev_conv: the reverse converter for Q = 8. Random X below the dynamic
// range D = 2^17*383*385 (and both ends) are cut into residues here and
// must come back unchanged. The carry-save tree must have the seven levels
// the paper gives for it.
module tb_rev_conv;
  localparam int Q = 8;
  localparam int W = 4*Q + 3;
  localparam longint unsigned M1 = 131072, M2 = 383, M3 = 385;
  localparam longint unsigned D = M1 * M2 * M3;

  logic [2*Q:0] x1;
  logic [Q:0]   x2, x3;
  logic [W-1:0] x;

  rev_conv #(.Q(Q)) dut (.x1(x1), .x2(x2), .x3(x3), .x(x));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s x=%0d got %0d", what, x1, x); end
  endtask

  task automatic one(input longint unsigned v);
    x1 = (2*Q+1)'(v % M1);
    x2 = (Q+1)'(v % M2);
    x3 = (Q+1)'(v % M3);
    #1;
    check(x == W'(v), "round trip");
  endtask

  initial begin
    check(dut.u_tree.LEVELS == 7, "seven CSA levels");
    one(0);
    one(D - 1);
    one(M1 - 1);
    one(M1 * M2 * 7);
    for (int i = 0; i < 30000; i++) one({$urandom, $urandom} % D);
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
