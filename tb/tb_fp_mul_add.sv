// tb_fp_mul_add: checks y = a*b + c against a reference worked out in double
// precision and rounded to binary32 after each operation. The product of two
// binary32 values is exact in double, and the sum is exact in double when
// the exponents stay within a narrow window, so the reference is exactly the
// correctly rounded single-precision result. Also checks zero operands,
// cancellation to zero and overflow to infinity.
module tb_fp_mul_add;
  import pba_pkg::*;
  import tb_fp_pkg::*;

  f32_t a, b, c, y;
  int checks = 0, failures = 0;

  fp_mul_add dut (.a(a), .b(b), .c(c), .y(y));

  task automatic check(f32_t want, string what);
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      $display("FAIL %s: a=%h b=%h c=%h y=%h want=%h", what, a, b, c, y, want);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    f32_t p;
    for (int i = 0; i < 20000; i++) begin
      a = rand_f32(6); b = rand_f32(6); c = rand_f32(6);
      p = to_f32(to_real(a) * to_real(b));
      #1;
      check(to_f32(to_real(p) + to_real(c)), "random");
    end
    a = 32'h0; b = 32'h3F80_0000; c = 32'h4040_0000; check(32'h4040_0000, "zero a");
    a = 32'h4000_0000; b = 32'h4000_0000; c = 32'hC080_0000; check(32'h0000_0000, "cancel");
    a = 32'h7F00_0000; b = 32'h7F00_0000; c = 32'h0; check(32'h7F80_0000, "overflow");
    a = 32'h3F80_0000; b = 32'h3F80_0000; c = 32'h3380_0000; check(32'h3F80_0000, "tie even");
    a = 32'h3F80_0001; b = 32'h3F80_0000; c = 32'h3380_0000; check(32'h3F80_0002, "tie odd");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
