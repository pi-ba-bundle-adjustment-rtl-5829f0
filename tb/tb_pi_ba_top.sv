// tb_pi_ba_top: end-to-end test of the Schur-elimination engine at its
// default parameters (two PEs with two SPUs each, up to 50 cameras).
//
// A random problem with b = 12 cameras is streamed in: start, the camera
// diagonals, points for both PEs (CO_i from 1 to 10 on PE 0, 5 to 12 on
// PE 1) and a flush. One point with CO_i = 11 is sent to PE 0, which must
// reject it. The output stream (the upper block triangle of S, then r) is
// compared word by word with a double-precision reference that leaves the
// rejected point out. Valid and ready are toggled at random on both
// streams. The test counts how often each mechanism of the engine occurs
// and fails if one never does: overlapped points in a PE pipeline, a
// finished stage 1 held back by a slower later stage, a pipeline bubble,
// both PEs in use, the CO_i range rejection, input and output back-pressure.
module tb_pi_ba_top;
  import pba_pkg::*;
  import tb_fp_pkg::*;
  import tb_ba_pkg::*;

  localparam int B = 12;

  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, m_last, err_co, busy;
  logic [31:0] s_data, m_data;
  logic [1:0][31:0] n_points, n_bubbles;
  int checks = 0, failures = 0;
  int c_overlap = 0, c_hold = 0, c_inbp = 0, c_outbp = 0;

  always #5 clk = ~clk;

  pi_ba_top dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 2; p++) ;
    if ((int'(dut.g_pe[0].u_pe.p2.v) + int'(dut.g_pe[0].u_pe.p3.v) + int'(dut.g_pe[0].u_pe.p4_v) +
         int'(dut.g_pe[0].u_pe.s1_busy)) >= 3) c_overlap++;
    if (dut.g_pe[1].u_pe.s1_done && !dut.g_pe[1].u_pe.adv) c_hold++;
    if (dut.g_pe[0].u_pe.s1_done && !dut.g_pe[0].u_pe.adv) c_hold++;
    if (s_valid && !s_ready) c_inbp++;
    if (m_valid && !m_ready) c_outbp++;
  end

  w32_t words [$];
  ba_problem pb;
  bit keep [];

  initial begin : drive
    pb = new(B);
    for (int i = 0; i < 14; i++) pb.add_point(1 + (i % 10), 0);
    for (int i = 0; i < 8; i++)  pb.add_point(5 + (i % 8), 1);
    pb.add_point(11, 0);                 // out of range for PE 0
    for (int i = 0; i < 6; i++)  pb.add_point(2, 0);
    keep = new[pb.npt];
    foreach (keep[i]) keep[i] = !(pb.co[i] > 10 && pb.pe[i] == 0);
    pb.reference(keep);
    pb.stream(words);
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    foreach (words[n]) begin
      @(negedge clk);
      s_data  = words[n];
      s_valid = 1'b1;
      while (!s_ready) @(negedge clk);
      @(posedge clk);
      #1 s_valid = 1'b0;
      if ($urandom_range(9) == 0) @(posedge clk);
    end
  end

  initial begin : sink
    int n = 0, total;
    bit got_last = 0;
    total = B * (B + 1) / 2 * 36 + 6 * B;
    wait (rst_n);
    while (!got_last) begin
      @(negedge clk);
      m_ready = ($urandom_range(3) != 0);
      #1;
      if (m_valid && m_ready) begin
        real want, got;
        got  = to_real(m_data);
        want = pb.expect_word(n);
        check(close(got, want, 2e-3, 2e-3), $sformatf("word %0d got %f want %f", n, got, want));
        if (m_last) got_last = 1;
        n++;
      end
    end
    m_ready <= 1'b0;
    check(n == total, $sformatf("word count %0d want %0d", n, total));
    check(err_co, "err_co set by the CO_i = 11 point");
    check(n_points[0] == 20, $sformatf("PE0 points %0d", n_points[0]));
    check(n_points[1] == 8, $sformatf("PE1 points %0d", n_points[1]));
    $display("mechanisms: overlap=%0d hold=%0d bubbles=%0d/%0d in_bp=%0d out_bp=%0d pe_points=%0d/%0d",
             c_overlap, c_hold, n_bubbles[0], n_bubbles[1], c_inbp, c_outbp, n_points[0], n_points[1]);
    check(c_overlap > 0, "pipeline overlap seen");
    check(c_hold > 0, "stage 1 held by a slower stage");
    check(n_bubbles[0] + n_bubbles[1] > 0, "bubble seen");
    check(c_inbp > 0, "input back-pressure seen");
    check(c_outbp > 0, "output back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
