// tb_ba_pkg: random bundle-adjustment problems and a double-precision
// reference of the Schur elimination, for the testbenches.
//
// A problem has b cameras and a list of points; point i is seen by CO_i
// distinct cameras in ascending order. All Jacobian and residual entries are
// random binary32 values in [-2, 2]; the diagonal of mu*Dp^T*Dp is in
// [1, 3) and that of mu*Dc^T*Dc in [0.5, 1.5), which keeps every U_i well
// conditioned. The reference follows the algebra directly:
//   U_i = diag(dp) + sum_j Jp^T Jp,  g_i = sum_j Jp^T eps,  W_ij = Jc^T Jp
//   S   = diag(mu Dc^T Dc) + sum_ij Jc^T Jc (on the diagonal blocks)
//         - sum_i sum_j1,j2 W_ij1 U_i^-1 W_ij2^T
//   r   = sum_ij Jc^T eps - sum_i sum_j W_ij U_i^-1 g_i
// in double precision, with U^-1 from the adjugate.
package tb_ba_pkg;
  import tb_fp_pkg::*;

  typedef logic [31:0] w32_t;

  class ba_problem;
    int   b;
    int   npt;
    int   co [$];
    int   pe [$];
    int   cams [$][$];
    w32_t dp [$][3];
    w32_t jp [$][$][6];
    w32_t jc [$][$][12];
    w32_t eps [$][$][2];
    w32_t mudc [][6];
    real  S [];
    real  r [];

    function new(int nb);
      b = nb;
      npt = 0;
      mudc = new[nb];
      for (int j = 0; j < nb; j++)
        for (int k = 0; k < 6; k++) mudc[j][k] = to_f32(0.5 + real'($urandom_range(1000)) / 1000.0);
    endfunction

    static function w32_t rnd();
      return to_f32((real'($urandom_range(4000)) - 2000.0) / 1000.0);
    endfunction

    // Add a point seen by `n` distinct random cameras, for PE `p`.
    function void add_point(int n, int p);
      int   cl [$];
      bit   used [];
      w32_t d3 [3];
      w32_t a6 [$][6];
      w32_t a12 [$][12];
      w32_t a2 [$][2];
      w32_t t6 [6];
      w32_t t12 [12];
      w32_t t2 [2];
      int   c;
      used = new[b];
      for (int k = 0; k < n && k < b; k++) begin
        do c = $urandom_range(b - 1); while (used[c]);
        used[c] = 1;
      end
      for (int j = 0; j < b; j++) if (used[j]) cl.push_back(j);
      for (int k = 0; k < 3; k++) d3[k] = to_f32(1.0 + real'($urandom_range(2000)) / 1000.0);
      for (int o = 0; o < cl.size(); o++) begin
        for (int k = 0; k < 6; k++)  t6[k] = rnd();
        for (int k = 0; k < 12; k++) t12[k] = rnd();
        for (int k = 0; k < 2; k++)  t2[k] = rnd();
        a6.push_back(t6); a12.push_back(t12); a2.push_back(t2);
      end
      co.push_back(cl.size());
      pe.push_back(p);
      cams.push_back(cl);
      dp.push_back(d3);
      jp.push_back(a6);
      jc.push_back(a12);
      eps.push_back(a2);
      npt++;
    endfunction

    // Words of the whole input stream: start, camera diagonals, points, flush.
    function void stream(ref w32_t q [$]);
      q.push_back({4'd1, 22'd0, 6'(b)});
      for (int j = 0; j < b; j++) begin
        q.push_back({4'd2, 22'd0, 6'(j)});
        for (int k = 0; k < 6; k++) q.push_back(mudc[j][k]);
      end
      for (int i = 0; i < npt; i++) point_words(i, q);
      q.push_back({4'd4, 28'd0});
    endfunction

    function void point_words(int i, ref w32_t q [$]);
      q.push_back({4'd3, 6'd0, 6'(co[i]), 7'd0, 1'(pe[i]), 8'd0});
      for (int k = 0; k < 3; k++) q.push_back(dp[i][k]);
      for (int o = 0; o < co[i]; o++) begin
        q.push_back(32'(cams[i][o]));
        for (int k = 0; k < 6; k++)  q.push_back(jp[i][o][k]);
        for (int k = 0; k < 12; k++) q.push_back(jc[i][o][k]);
        for (int k = 0; k < 2; k++)  q.push_back(eps[i][o][k]);
      end
    endfunction

    // Reference over the points whose `keep` flag is set.
    function void reference(bit keep []);
      int n6;
      n6 = 6 * b;
      S = new[n6 * n6];
      r = new[n6];
      foreach (S[x]) S[x] = 0.0;
      foreach (r[x]) r[x] = 0.0;
      for (int j = 0; j < b; j++)
        for (int k = 0; k < 6; k++) S[(6*j+k) * n6 + 6*j+k] += to_real(mudc[j][k]);
      for (int i = 0; i < npt; i++) begin
        real U [3][3], iv [3][3], g [3], det, W [$][6][3], X [$][6][3];
        real wz [6][3];
        if (!keep[i]) continue;
        foreach (U[a, c]) U[a][c] = 0.0;
        for (int a = 0; a < 3; a++) begin U[a][a] = to_real(dp[i][a]); g[a] = 0.0; end
        for (int o = 0; o < co[i]; o++) begin
          int j = cams[i][o];
          for (int k = 0; k < 2; k++) begin
            for (int a = 0; a < 3; a++) begin
              for (int c = 0; c < 3; c++) U[a][c] += to_real(jp[i][o][k*3+a]) * to_real(jp[i][o][k*3+c]);
              g[a] += to_real(jp[i][o][k*3+a]) * to_real(eps[i][o][k]);
            end
            for (int a = 0; a < 6; a++) begin
              for (int c = 0; c < 6; c++)
                S[(6*j+a) * n6 + 6*j+c] += to_real(jc[i][o][k*6+a]) * to_real(jc[i][o][k*6+c]);
              r[6*j+a] += to_real(jc[i][o][k*6+a]) * to_real(eps[i][o][k]);
            end
          end
          for (int a = 0; a < 6; a++)
            for (int c = 0; c < 3; c++)
              wz[a][c] = to_real(jc[i][o][a]) * to_real(jp[i][o][c]) +
                         to_real(jc[i][o][6+a]) * to_real(jp[i][o][3+c]);
          W.push_back(wz);
        end
        iv[0][0] = U[1][1]*U[2][2] - U[1][2]*U[2][1];
        iv[0][1] = U[0][2]*U[2][1] - U[0][1]*U[2][2];
        iv[0][2] = U[0][1]*U[1][2] - U[0][2]*U[1][1];
        iv[1][0] = U[1][2]*U[2][0] - U[1][0]*U[2][2];
        iv[1][1] = U[0][0]*U[2][2] - U[0][2]*U[2][0];
        iv[1][2] = U[0][2]*U[1][0] - U[0][0]*U[1][2];
        iv[2][0] = U[1][0]*U[2][1] - U[1][1]*U[2][0];
        iv[2][1] = U[0][1]*U[2][0] - U[0][0]*U[2][1];
        iv[2][2] = U[0][0]*U[1][1] - U[0][1]*U[1][0];
        det = U[0][0]*iv[0][0] + U[0][1]*iv[1][0] + U[0][2]*iv[2][0];
        foreach (iv[a, c]) iv[a][c] = iv[a][c] / det;
        for (int o = 0; o < co[i]; o++) begin
          for (int a = 0; a < 6; a++)
            for (int c = 0; c < 3; c++)
              wz[a][c] = -(W[o][a][0]*iv[0][c] + W[o][a][1]*iv[1][c] + W[o][a][2]*iv[2][c]);
          X.push_back(wz);
        end
        for (int o1 = 0; o1 < co[i]; o1++) begin
          int j1 = cams[i][o1];
          for (int a = 0; a < 6; a++)
            r[6*j1+a] += X[o1][a][0]*g[0] + X[o1][a][1]*g[1] + X[o1][a][2]*g[2];
          for (int o2 = 0; o2 < co[i]; o2++) begin
            int j2 = cams[i][o2];
            for (int a = 0; a < 6; a++)
              for (int c = 0; c < 6; c++)
                S[(6*j1+a) * n6 + 6*j2+c] += X[o1][a][0]*W[o2][c][0] + X[o1][a][1]*W[o2][c][1] +
                                             X[o1][a][2]*W[o2][c][2];
          end
        end
      end
    endfunction

    // Expected value of output word n (S upper block triangle, then r).
    function real expect_word(int n);
      int nb = b * (b + 1) / 2 * 36;
      if (n < nb) begin
        int blk = n / 36, e = n % 36, j1 = 0, j2;
        while (blk >= b - j1) begin blk -= b - j1; j1++; end
        j2 = j1 + blk;
        return S[(6*j1 + e/6) * 6 * b + 6*j2 + e%6];
      end
      return r[n - nb];
    endfunction

    function int out_words();
      return b * (b + 1) / 2 * 36 + 6 * b;
    endfunction
  endclass

endpackage
