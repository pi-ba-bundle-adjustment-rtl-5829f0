// fp_mul_add: single-precision multiplier followed by an adder, y = a*b + c.
//
// This is the multiplier/adder pair that the processing element repeats in
// every stage; an accumulator is formed by feeding y back to c. Both
// operations round to nearest-even on their own (no fused rounding), as two
// separate floating-point cores would. The arithmetic is the one in pba_pkg
// (subnormals flushed to zero, which is this design's simplification).
// Purely combinational: the stages that use it register its result.
module fp_mul_add
  import pba_pkg::*;
(
  input  f32_t a,
  input  f32_t b,
  input  f32_t c,
  output f32_t y
);
  f32_t p;
  always_comb begin
    p = fp_mul(a, b);
    y = fp_add(p, c);
  end
endmodule
