// fp32_mul_tb -- self-checking testbench of the single-precision multiplier.
// Random normal operands and a set of corner cases (zeros, infinities, NaN,
// overflow, underflow flush, rounding carry) are compared with a reference
// product formed in double precision and rounded once to binary32.
module fp32_mul_tb;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] exp_y, input string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  task automatic rnd(input int span);
    a = rand_fp(span);
    b = rand_fp(span);
    check(r2f(f2r(a) * f2r(b)), "random");
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Fig. 3 example pairs: 56*98, 16*40, 78*32.
    a = 32'h42600000; b = 32'h42C40000; check(32'h45AB8000, "56*98");
    a = 32'h41800000; b = 32'h42200000; check(32'h44200000, "16*40");
    a = 32'h429C0000; b = 32'h42000000; check(32'h451C0000, "78*32");
    a = 32'h42600000; b = 32'h00000000; check(32'h00000000, "x*0");
    a = 32'hC2600000; b = 32'h00000000; check(32'h80000000, "-x*0");
    a = 32'h7F800000; b = 32'h40000000; check(32'h7F800000, "inf*2");
    a = 32'h7F800000; b = 32'h00000000; check(32'h7FC00000, "inf*0");
    a = 32'h7FC00001; b = 32'h3F800000; check(32'h7FC00000, "nan");
    a = 32'h7F000000; b = 32'h7F000000; check(32'h7F800000, "overflow");
    a = 32'h00800000; b = 32'h3F000000; check(32'h00000000, "underflow");
    a = 32'h3FFFFFFF; b = 32'h3FFFFFFF; check(r2f(f2r(a) * f2r(b)), "round carry");
    a = 32'h3F800001; b = 32'h3F7FFFFF; check(r2f(f2r(a) * f2r(b)), "near one");
    repeat (3000) rnd(20);
    repeat (500)  rnd(126);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
