// tb_se_stage2: inverts random symmetric positive definite 3x3 matrices
// and compares the result with the inverse computed in double precision
// (relative tolerance 1e-4 of the largest entry). Checks that done rises
// exactly 70 clocks after start.
module tb_se_stage2;
  import pba_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  f32_t [8:0] u, inv_o;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  se_stage2 dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real m [3][3], a [3][3], iv [3][3], det, mx;
    int lat;
    u = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      foreach (a[i, j]) a[i][j] = (real'($urandom_range(2000)) - 1000.0) / 500.0;
      foreach (m[i, j]) begin
        m[i][j] = (i == j) ? 1.0 : 0.0;
        for (int k = 0; k < 3; k++) m[i][j] += a[k][i] * a[k][j];
      end
      foreach (m[i, j]) u[i*3+j] = to_f32(m[i][j]);
      foreach (m[i, j]) m[i][j] = to_real(u[i*3+j]);
      iv[0][0] = m[1][1]*m[2][2]-m[1][2]*m[2][1]; iv[0][1] = m[0][2]*m[2][1]-m[0][1]*m[2][2];
      iv[0][2] = m[0][1]*m[1][2]-m[0][2]*m[1][1]; iv[1][0] = m[1][2]*m[2][0]-m[1][0]*m[2][2];
      iv[1][1] = m[0][0]*m[2][2]-m[0][2]*m[2][0]; iv[1][2] = m[0][2]*m[1][0]-m[0][0]*m[1][2];
      iv[2][0] = m[1][0]*m[2][1]-m[1][1]*m[2][0]; iv[2][1] = m[0][1]*m[2][0]-m[0][0]*m[2][1];
      iv[2][2] = m[0][0]*m[1][1]-m[0][1]*m[1][0];
      det = m[0][0]*iv[0][0] + m[0][1]*iv[1][0] + m[0][2]*iv[2][0];
      mx = 0.0;
      foreach (iv[i, j]) begin iv[i][j] = iv[i][j] / det; if (rabs(iv[i][j]) > mx) mx = rabs(iv[i][j]); end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 70) begin failures++; $display("FAIL latency %0d", lat); end
      foreach (iv[i, j]) begin
        checks++;
        if (!close(to_real(inv_o[i*3+j]), iv[i][j], 0.0, 1e-4 * mx)) begin
          failures++;
          $display("FAIL inv[%0d][%0d] got %f want %f", i, j, to_real(inv_o[i*3+j]), iv[i][j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
