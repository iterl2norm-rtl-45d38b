// tb_fp_units: self-checking test of the floating-point adder and multiplier.
//
// Random operands in FP32 and BFloat16 are added and multiplied; every RTL
// result must equal, bit for bit, the double-precision result rounded to the
// format by fp_tb_pkg::r2f (round to nearest even, flush to zero).  Half of
// the addition operands share exponents so that cancellation and the
// normalising left shift are exercised.
module tb_fp_units;
  import fp_tb_pkg::*;

  logic [31:0] a32, b32, s32, p32;
  logic [15:0] a16, b16, s16, p16;
  int checks = 0, failures = 0;

  fp_add #(.EXP_W(8), .MAN_W(23)) u_add32 (.a(a32), .b(b32), .y(s32));
  fp_mul #(.EXP_W(8), .MAN_W(23)) u_mul32 (.a(a32), .b(b32), .y(p32));
  fp_add #(.EXP_W(8), .MAN_W(7))  u_add16 (.a(a16), .b(b16), .y(s16));
  fp_mul #(.EXP_W(8), .MAN_W(7))  u_mul16 (.a(a16), .b(b16), .y(p16));

  task automatic check(string what, logic [31:0] got, logic [31:0] exp, logic [31:0] x, logic [31:0] y);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s %h %h -> %h expected %h", what, x, y, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int span = (i % 2) ? 2 : 30;
      a32 = rand_fp(8, 23, -span, span);
      b32 = (i % 4 == 1) ? (a32 ^ 32'h8000_0000) ^ ($urandom & 32'h7) : rand_fp(8, 23, -span, span);
      a16 = 16'(rand_fp(8, 7, -span, span));
      b16 = 16'(rand_fp(8, 7, -span, span));
      #1;
      check("add32", s32, r2f(f2r(a32, 8, 23) + f2r(b32, 8, 23), 8, 23), a32, b32);
      check("mul32", p32, r2f(f2r(a32, 8, 23) * f2r(b32, 8, 23), 8, 23), a32, b32);
      check("add16", 32'(s16), r2f(f2r(32'(a16), 8, 7) + f2r(32'(b16), 8, 7), 8, 7), 32'(a16), 32'(b16));
      check("mul16", 32'(p16), r2f(f2r(32'(a16), 8, 7) * f2r(32'(b16), 8, 7), 8, 7), 32'(a16), 32'(b16));
    end
    // Zero operands.
    a32 = 32'h3f80_0000; b32 = 32'h0; a16 = 16'h0; b16 = 16'h0; #1;
    check("add32 x+0", s32, 32'h3f80_0000, a32, b32);
    check("mul32 x*0", p32, 32'h0, a32, b32);
    check("add16 0+0", 32'(s16), 32'h0, 32'(a16), 32'(b16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
