// se_stage4: fourth stage of the processing element (lines 14 and 16 of the
// Schur elimination algorithm).
//
// Q matrix-S processing units (spu) share the update of S for all camera
// pairs of the point, each into its own copy of S. Beside them a small
// r' unit performs r_j -= W_ij * inv * g_i, which with X_ij = -W_ij * inv is
// r'_j += X_ij * g_i: one 3-term dot product per clock (6*CO_i clocks),
// added into a per-camera r' RAM. The SPUs are the stage's bottleneck, as
// the source says; the r' unit finishes well before them.
//
// Interface: start pulses with co, cams, g and ncam valid; done is high
// when idle. clear zeroes the r' RAM and every SPU copy of S. The
// accumulation unit reads the S copies (acc_raddr, acc_rdata) and the r'
// RAM (rd_cam, rd_k, rd_r4), both with one clock of latency.
module se_stage4
  import pba_pkg::*;
#(
  parameter int unsigned MAX_CO = 10,
  parameter int unsigned NCAM   = NCAM_MAX,
  parameter int unsigned Q      = 2,
  parameter int unsigned DEPTH  = NCAM * (NCAM + 1) / 2 * 36,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clear,
  output logic                              clr_busy,
  input  logic                              start,
  input  logic [CO_W-1:0]                   co,
  input  logic [MAX_CO-1:0][CAM_W-1:0]      cams,
  input  f32_t [2:0]                        g,
  input  logic [CAM_W-1:0]                  ncam,
  output logic                              done,
  // X RAM read ports: 0..Q-1 for the SPUs, Q for the r' unit
  output logic [Q:0][$clog2(MAX_CO)-1:0]    x_obs,
  output logic [Q:0][2:0]                   x_row,
  input  f32_t [Q:0][2:0]                   x_data,
  // W^T RAM read ports for the SPUs
  output logic [Q-1:0][$clog2(MAX_CO)-1:0]  wt_obs,
  output logic [Q-1:0][2:0]                 wt_row,
  input  f32_t [Q-1:0][2:0]                 wt_data,
  // accumulation read ports
  input  logic [AW-1:0]                     acc_raddr,
  output f32_t [Q-1:0]                      acc_rdata,
  input  logic [CAM_W-1:0]                  rd_cam,
  input  logic [2:0]                        rd_k,
  output f32_t                              rd_r4
);
  localparam int OW = $clog2(MAX_CO);

  logic [Q-1:0] spu_done, spu_clr;

  for (genvar s = 0; s < int'(Q); s++) begin : g_spu
    spu #(.MAX_CO(MAX_CO), .NCAM(NCAM), .Q(Q), .LANE(s), .DEPTH(DEPTH), .AW(AW)) u_spu (
      .clk, .rst_n, .clear, .clr_busy(spu_clr[s]), .start, .co, .cams, .ncam,
      .done(spu_done[s]),
      .x_obs(x_obs[s]), .x_row(x_row[s]), .x_data(x_data[s]),
      .wt_obs(wt_obs[s]), .wt_row(wt_row[s]), .wt_data(wt_data[s]),
      .acc_raddr, .acc_rdata(acc_rdata[s]));
  end

  // ---- r' unit ----
  f32_t r4 [NCAM][6];
  logic                         rrun;
  logic [CO_W-1:0]              co_q, a;
  logic [2:0]                   row;
  logic [MAX_CO-1:0][CAM_W-1:0] cams_q;
  f32_t [2:0]                   g_q;
  f32_t                         p1, p2, p3, rsum;
  logic [CAM_W-1:0]             clr_cam;
  logic                         clr_run;

  assign x_obs[Q] = OW'(a);
  assign x_row[Q] = row;

  fp_mul_add u_r1 (.a(x_data[Q][0]), .b(g_q[0]), .c(F32_ZERO), .y(p1));
  fp_mul_add u_r2 (.a(x_data[Q][1]), .b(g_q[1]), .c(p1), .y(p2));
  fp_mul_add u_r3 (.a(x_data[Q][2]), .b(g_q[2]), .c(p2), .y(p3));
  always_comb rsum = fp_add(r4[cams_q[a]][row], p3);

  assign done     = (&spu_done) && !rrun;
  assign clr_busy = (|spu_clr) || clr_run || clear;

  always_ff @(posedge clk) begin
    if (clear || clr_run) begin
      for (int i = 0; i < 6; i++) r4[clear ? 0 : clr_cam][i] <= F32_ZERO;
    end else if (rrun) begin
      r4[cams_q[a]][row] <= rsum;
    end
    rd_r4 <= r4[rd_cam][rd_k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rrun <= 1'b0; co_q <= '0; a <= '0; row <= '0; cams_q <= '0; g_q <= '0;
      clr_cam <= '0; clr_run <= 1'b0;
    end else begin
      if (clear) begin
        clr_run <= (NCAM > 1);
        clr_cam <= CAM_W'(1);
      end else if (clr_run) begin
        clr_cam <= clr_cam + 1'b1;
        if (int'(clr_cam) == NCAM - 1) clr_run <= 1'b0;
      end
      if (start) begin
        rrun <= (co != '0); co_q <= co; cams_q <= cams; g_q <= g; a <= '0; row <= '0;
      end else if (rrun) begin
        if (row == 3'd5) begin
          row <= '0;
          a   <= a + 1'b1;
          if (a + 1'b1 == co_q) rrun <= 1'b0;
        end else begin
          row <= row + 3'd1;
        end
      end
    end
  end
endmodule
