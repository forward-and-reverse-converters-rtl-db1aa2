// tb_fwd_conv: the three-channel forward converter for Q = 8 on random
// numbers below the dynamic range D = 2^17*383*385 and on its ends.
module tb_fwd_conv;
  localparam int Q = 8;
  localparam int W = 4*Q + 3;
  localparam longint unsigned M1 = 131072, M2 = 383, M3 = 385;
  localparam longint unsigned D = M1 * M2 * M3;

  logic [W-1:0] x;
  logic [2*Q:0] r1;
  logic [Q:0]   r2, r3;

  fwd_conv #(.Q(Q)) dut (.x(x), .r1(r1), .r2(r2), .r3(r3));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s x=%0d", what, x); end
  endtask

  task automatic one(input longint unsigned v);
    x = W'(v);
    #1;
    check(r1 == (2*Q+1)'(v % M1), "r1");
    check(r2 == (Q+1)'(v % M2), "r2");
    check(r3 == (Q+1)'(v % M3), "r3");
  endtask

  initial begin
    one(0);
    one(D - 1);
    one(M1 * M2 - 1);
    for (int i = 0; i < 20000; i++) one({$urandom, $urandom} % D);
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
