// tb_fp_recip: drives random operands into the sequential reciprocal and
// compares y with 1/x computed in double precision and rounded to binary32.
// Checks the start-to-done latency of 30 clocks, exact powers of two and a
// zero operand (infinity).
module tb_fp_recip;
  import pba_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  f32_t x, y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fp_recip dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(f32_t xi, f32_t want, string what);
    int lat;
    @(negedge clk);
    x = xi; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (y !== want) begin
      failures++;
      $display("FAIL %s: x=%h y=%h want=%h", what, xi, y, want);
    end
    checks++;
    if (lat != 30) begin
      failures++;
      $display("FAIL latency %0d", lat);
    end
  endtask

  initial begin
    f32_t xi;
    x = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      xi = rand_f32(40);
      run(xi, to_f32(1.0 / to_real(xi)), "random");
    end
    run(32'h4000_0000, 32'h3F00_0000, "two");
    run(32'hBE80_0000, 32'hC080_0000, "-0.25");
    run(32'h0000_0000, 32'h7F80_0000, "zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
