// tb_se_stage1: feeds random points (header and observation records, held
// valid all the time) into stage 1 and checks, against double-precision
// sums worked out here, U_i, g_i, every row of W_ij written to the W RAM,
// the camera list, and finally the per-camera diagonal blocks of Jc^T Jc and
// the vectors Jc^T eps accumulated over all points (read through the
// accumulation port). Checks that a point takes 37*CO_i clocks (36 compute
// clocks plus one record-accept clock per observation) from its first
// observation to done, and that clear zeroes the per-camera RAMs.
module tb_se_stage1;
  import pba_pkg::*;
  import tb_fp_pkg::*;
  import tb_ba_pkg::*;

  localparam int MC = 10, NC = 6;
  logic clk = 0, rst_n = 0, clear = 0, clr_busy, go = 1, rec_valid = 0, rec_ready;
  pe_rec_t rec;
  logic done, advance = 0, busy;
  f32_t [8:0] u_o;
  f32_t [2:0] g_o;
  logic [CO_W-1:0] co_o;
  logic [MC-1:0][CAM_W-1:0] cams_o;
  logic w_we;
  logic [$clog2(MC)-1:0] w_obs;
  logic [2:0] w_row;
  f32_t [2:0] w_data;
  logic [CAM_W-1:0] rd_cam = 0;
  logic [4:0] rd_tri = 0;
  logic [2:0] rd_k = 0;
  f32_t rd_sd, rd_r1;
  f32_t wcap [MC][6][3];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  se_stage1 #(.MAX_CO(MC), .NCAM(NC)) dut (.*);

  always @(posedge clk) if (w_we) wcap[w_obs][w_row] <= '{w_data[0], w_data[1], w_data[2]};

  task automatic chk(real got, real want, string what);
    checks++;
    if (!close(got, want, 1e-4, 1e-4)) begin
      failures++;
      $display("FAIL %s got %f want %f", what, got, want);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ba_problem pb;
  real sdr [NC][6][6], r1r [NC][6];

  initial begin
    int lat;
    pb = new(NC);
    pb.add_point(3, 0); pb.add_point(2, 0); pb.add_point(6, 0); pb.add_point(1, 0);
    foreach (sdr[j, a, c]) sdr[j][a][c] = 0.0;
    foreach (r1r[j, a]) r1r[j][a] = 0.0;
    rec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (clr_busy) @(negedge clk);
    for (int i = 0; i < pb.npt; i++) begin
      real U [3][3], g [3];
      rec = '0; rec.is_hdr = 1; rec.co = CO_W'(pb.co[i]);
      for (int k = 0; k < 3; k++) rec.dp[k] = pb.dp[i][k];
      rec_valid = 1;
      @(negedge clk);
      lat = 0;
      foreach (U[a, c]) U[a][c] = (a == c) ? to_real(pb.dp[i][a]) : 0.0;
      foreach (g[a]) g[a] = 0.0;
      for (int o = 0; o < pb.co[i]; o++) begin
        int j;
        j = pb.cams[i][o];
        rec = '0;
        rec.obs.cam = CAM_W'(j);
        for (int k = 0; k < 2; k++) begin
          for (int c = 0; c < 3; c++) rec.obs.jp[k][c] = pb.jp[i][o][k*3+c];
          for (int c = 0; c < 6; c++) rec.obs.jc[k][c] = pb.jc[i][o][k*6+c];
          rec.obs.eps[k] = pb.eps[i][o][k];
          for (int a = 0; a < 3; a++) begin
            for (int c = 0; c < 3; c++) U[a][c] += to_real(pb.jp[i][o][k*3+a]) * to_real(pb.jp[i][o][k*3+c]);
            g[a] += to_real(pb.jp[i][o][k*3+a]) * to_real(pb.eps[i][o][k]);
          end
          for (int a = 0; a < 6; a++) begin
            for (int c = 0; c < 6; c++) sdr[j][a][c] += to_real(pb.jc[i][o][k*6+a]) * to_real(pb.jc[i][o][k*6+c]);
            r1r[j][a] += to_real(pb.jc[i][o][k*6+a]) * to_real(pb.eps[i][o][k]);
          end
        end
        #1;
        while (!rec_ready) begin @(negedge clk); lat++; end
        @(negedge clk); lat++;
      end
      rec_valid = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 37 * pb.co[i]) begin failures++; $display("FAIL latency %0d co %0d", lat, pb.co[i]); end
      foreach (U[a, c]) chk(to_real(u_o[a*3+c]), U[a][c], $sformatf("U[%0d][%0d]", a, c));
      foreach (g[a]) chk(to_real(g_o[a]), g[a], "g");
      checks++;
      if (co_o != CO_W'(pb.co[i])) begin failures++; $display("FAIL co"); end
      for (int o = 0; o < pb.co[i]; o++) begin
        checks++;
        if (cams_o[o] != CAM_W'(pb.cams[i][o])) begin failures++; $display("FAIL cams"); end
        for (int a = 0; a < 6; a++)
          for (int c = 0; c < 3; c++)
            chk(to_real(wcap[o][a][c]),
                to_real(pb.jc[i][o][a]) * to_real(pb.jp[i][o][c]) + to_real(pb.jc[i][o][6+a]) * to_real(pb.jp[i][o][3+c]),
                $sformatf("W[%0d][%0d][%0d]", o, a, c));
      end
      advance = 1; @(negedge clk); advance = 0;
    end
    for (int j = 0; j < NC; j++) begin
      for (int a = 0; a < 6; a++)
        for (int c = a; c < 6; c++) begin
          rd_cam = CAM_W'(j); rd_tri = tri6(3'(a), 3'(c));
          @(negedge clk);
          chk(to_real(rd_sd), sdr[j][a][c], $sformatf("sd cam %0d (%0d,%0d)", j, a, c));
        end
      for (int a = 0; a < 6; a++) begin
        rd_cam = CAM_W'(j); rd_k = 3'(a);
        @(negedge clk);
        chk(to_real(rd_r1), r1r[j][a], "r1");
      end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (clr_busy) @(negedge clk);
    rd_cam = CAM_W'(NC - 1); rd_tri = 5'd20; rd_k = 3'd5;
    @(negedge clk);
    checks++;
    if (rd_sd != 0 || rd_r1 != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
