// tb_mod_adder: random and corner tests of the final modular adder.
// Three configurations: the 9-bit modulo-383 adder of the forward converter
// (inputs anywhere in 0..511, with the extra carry), a 9-bit modulo-385
// adder, and the 17-bit modulo-147455 adder of the reverse converter with
// the constant 2^17 term switched on. Expected values are computed here
// with integer arithmetic.
module tb_mod_adder;
  logic [8:0]  a9, b9;
  logic [16:0] a17, b17;
  logic        hi;
  logic [8:0]  r383, r385;
  logic [17:0] rrev;

  mod_adder #(.N(9),  .MOD(11'd383),    .OW(9))  u383 (.a(a9), .b(b9), .hi(hi), .r(r383));
  mod_adder #(.N(9),  .MOD(11'd385),    .OW(9))  u385 (.a(a9), .b(b9), .hi(hi), .r(r385));
  mod_adder #(.N(17), .MOD(19'd147455), .HI_CONST(1'b1), .OW(18)) urev (.a(a17), .b(b17), .hi(hi), .r(rrev));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s a=%0d b=%0d hi=%0d", what, a9, b9, hi); end
  endtask

  task automatic one(input int unsigned x, input int unsigned y, input int unsigned yr, input int unsigned xr, input bit h);
    a9 = 9'(x); b9 = 9'(y); a17 = 17'(xr); b17 = 17'(yr); hi = h;
    #1;
    check(r383 == 9'((x % 512 + y % 512 + 512*h) % 383), "mod 383");
    check(r385 == 9'((x % 512 + y % 512 + 512*h) % 385), "mod 385");
    check(rrev == 18'((longint'(xr) % 131072 + longint'(yr) % 131072 + 131072*(1+longint'(h))) % 147455), "mod m2m3");
  endtask

  initial begin
    one(0, 0, 0, 0, 0);
    one(511, 511, 131071, 131071, 1);
    one(382, 1, 1, 147454 - 131072, 0);
    one(383, 0, 0, 0, 0);
    for (int i = 0; i < 20000; i++) one($urandom, $urandom, $urandom, $urandom, 1'($urandom));
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
