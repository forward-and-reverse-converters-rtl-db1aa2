// tb_fwd_conv_mi: the m2 and m3 residue generators for Q = 8 against the
// % operator, on every X3/X2/X1/X0 corner and on random 35-bit inputs
// (inputs above the dynamic range are legal and must also reduce).
module tb_fwd_conv_mi;
  localparam int Q = 8;
  localparam int W = 4*Q + 3;
  localparam longint unsigned M2 = 383, M3 = 385;

  logic [W-1:0] x;
  logic [Q:0]   r2, r3;

  fwd_conv_mi #(.Q(Q), .PLUS(1'b0)) u2 (.x(x), .r(r2));
  fwd_conv_mi #(.Q(Q), .PLUS(1'b1)) u3 (.x(x), .r(r3));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s x=%0d", what, x); end
  endtask

  task automatic one(input longint unsigned v);
    x = W'(v);
    #1;
    check(r2 == (Q+1)'(longint'(x) % M2), "mod 383");
    check(r3 == (Q+1)'(longint'(x) % M3), "mod 385");
  endtask

  initial begin
    one(0);
    one((64'd1 << W) - 1);
    for (int k = 0; k < 16; k++) one({$urandom, $urandom} & {{(64-W){1'b0}}, {W{1'b1}}} | (64'd1 << (2*k)));
    for (int i = 0; i < 30000; i++) one({$urandom, $urandom});
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
