// tb_fwd_lut: exhaustive check of the forward-converter tables for Q = 8.
// F(Z) = |2^9 Z|_m, F^2(Z) = |2^18 Z|_m and F^3(Z) = |2^27 Z + 5|_m are read
// for every address, for m2 = 383 and m3 = 385, and compared with integer
// arithmetic done here.
module tb_fwd_lut;
  localparam int Q = 8;
  localparam longint unsigned M2 = 383, M3 = 385;

  logic [Q:0]   z;
  logic [Q-1:0] z3;
  logic [Q:0]   y21, y22, y23, y31, y32, y33;

  fwd_lut #(.Q(Q), .PLUS(1'b0), .PW(1)) u21 (.z(z), .y(y21));
  fwd_lut #(.Q(Q), .PLUS(1'b0), .PW(2)) u22 (.z(z), .y(y22));
  fwd_lut #(.Q(Q), .PLUS(1'b0), .PW(3), .AW(Q)) u23 (.z(z3), .y(y23));
  fwd_lut #(.Q(Q), .PLUS(1'b1), .PW(1)) u31 (.z(z), .y(y31));
  fwd_lut #(.Q(Q), .PLUS(1'b1), .PW(2)) u32 (.z(z), .y(y32));
  fwd_lut #(.Q(Q), .PLUS(1'b1), .PW(3), .AW(Q), .ADD(72'd5)) u33 (.z(z3), .y(y33));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s z=%0d", what, z); end
  endtask

  initial begin
    for (int i = 0; i < 2**(Q+1); i++) begin
      longint unsigned zz;
      zz = longint'(i);
      z  = (Q+1)'(i);
      z3 = Q'(i);
      #1;
      check(y21 == (Q+1)'((zz << 9) % M2), "F m2");
      check(y22 == (Q+1)'((zz << 18) % M2), "F^2 m2");
      check(y31 == (Q+1)'((zz << 9) % M3), "F m3");
      check(y32 == (Q+1)'((zz << 18) % M3), "F^2 m3");
      if (i < 2**Q) begin
        check(y23 == (Q+1)'((zz << 27) % M2), "F^3 m2");
        check(y33 == (Q+1)'(((zz << 27) + 5) % M3), "F^3 m3 +5");
      end
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
