// tb_fp32_fma: self-checking test of the combinational FP32 fused
// multiply-add against a double-precision reference rounded to FP32.
// Covers random multiply-adds, plain additions (b = 1.0) with both signs and
// cancellation, squares accumulated as in the l2 lanes, and the zero,
// infinity and NaN cases.
module tb_fp32_fma;
  import fp_ref_pkg::*;

  logic [31:0] a, b, c, r;
  int checks = 0, failures = 0;

  fp32_fma dut (.a(a), .b(b), .c(c), .r(r));

  task automatic check(input logic [31:0] exp, input string what);
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %h*%h+%h = %h expected %h", what, a, b, c, r, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random fma, moderate exponents
    for (int i = 0; i < 3000; i++) begin
      a = frand(100, 154); b = frand(100, 154); c = frand(90, 170);
      check(ffma(a, b, c), "fma");
    end
    // additions, close exponents (cancellation)
    for (int i = 0; i < 3000; i++) begin
      a = frand(120, 124); b = 32'h3F80_0000; c = frand(120, 124);
      check(fadd(a, c), "add");
    end
    // exact cancellation
    a = 32'h4049_0FDB; b = 32'h3F80_0000; c = 32'hC049_0FDB; check(32'h0000_0000, "cancel");
    // squares plus accumulator
    for (int i = 0; i < 2000; i++) begin
      a = frand(110, 135); b = a; c = {1'b0, 8'(100 + $urandom_range(60)), 23'($urandom)};
      check(ffma(a, b, c), "square");
    end
    // specials
    a = 32'h0000_0000; b = 32'h4000_0000; c = 32'h4040_0000; check(32'h4040_0000, "0*x+c");
    a = 32'h7F80_0000; b = 32'h0000_0000; c = 32'h4040_0000; check(32'h7FC0_0000, "inf*0");
    a = 32'h7F80_0000; b = 32'h4000_0000; c = 32'h4040_0000; check(32'h7F80_0000, "inf");
    a = 32'h7F00_0000; b = 32'h7F00_0000; c = 32'h0000_0000; check(32'h7F80_0000, "overflow");
    a = 32'h3F80_0000; b = 32'h3F80_0000; c = 32'h3F80_0000; check(32'h4000_0000, "1+1");
    a = 32'h3F80_0000; b = 32'h3F80_0000; c = 32'h3380_0000; check(32'h3F80_0000, "tie-even");
    a = 32'h3F80_0001; b = 32'h3F80_0000; c = 32'h3380_0000; check(32'h3F80_0002, "tie-odd");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
