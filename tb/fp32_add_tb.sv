// fp32_add_tb -- self-checking testbench of the single-precision adder.
// Random operands with near and far exponents, same and opposite signs, plus
// corner cases (exact cancellation, zeros, infinities, NaN, overflow), are
// compared with a reference sum formed in double precision and rounded once
// to binary32.
module fp32_add_tb;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] exp_y, input string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  task automatic rnd(input int span);
    a = rand_fp(span);
    b = rand_fp(span);
    check(r2f(f2r(a) + f2r(b)), "random");
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 32'h45AB8000; b = 32'h44200000; check(32'h45BF8000, "5488+640");
    a = 32'h3F800000; b = 32'hBF800000; check(32'h00000000, "1-1");
    a = 32'h80000000; b = 32'h80000000; check(32'h80000000, "-0+-0");
    a = 32'h00000000; b = 32'h80000000; check(32'h00000000, "0+-0");
    a = 32'h00000000; b = 32'h42600000; check(32'h42600000, "0+x");
    a = 32'h7F800000; b = 32'hFF800000; check(32'h7FC00000, "inf-inf");
    a = 32'h7F800000; b = 32'h3F800000; check(32'h7F800000, "inf+1");
    a = 32'h7F7FFFFF; b = 32'h7F7FFFFF; check(32'h7F800000, "overflow");
    a = 32'h3F800000; b = 32'h33800000; check(r2f(f2r(a) + f2r(b)), "tie");
    a = 32'h3F800001; b = 32'hBF800000; check(r2f(f2r(a) + f2r(b)), "cancel");
    a = 32'h4B7FFFFF; b = 32'h3F000000; check(r2f(f2r(a) + f2r(b)), "carry tie");
    repeat (3000) rnd(3);
    repeat (3000) rnd(15);
    repeat (500)  rnd(120);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
