// se_pe: Schur-elimination processing element, the four-stage pipeline of
// the architecture figure.
//
//   stage 1 (se_stage1): U_i, g_i, W_ij, diagonal blocks of S and r'
//   stage 2 (se_stage2): inv = U_i^-1, 70 clocks
//   stage 3 (se_stage3): X_ij = -W_ij * inv, 36*CO_i clocks
//   stage 4 (se_stage4): Q SPUs and the r' unit, about 18(CO_i^2+CO_i)/Q clocks
//
// The stages form a coarse pipeline that holds up to four points at once,
// one per stage. All stages move forward together (an "advance") when
// every occupied stage has finished, so the slowest stage sets the pace, as
// in the source's balance rule 18(CO_i^2+CO_i)/q ~ 36*CO_i ~ 70. If stage 1
// is still receiving its point when the later stages have finished, they
// advance without it and a bubble enters stage 2. The buffers between stages
// are bank-switched: the W RAM has three banks (points in stages 1, 2 and 3)
// and the X and W^T RAMs two (stages 3 and 4); each point takes the next
// bank numbers when stage 1 accepts it. The advance rule, the bank scheme
// and the record handshake are this design's own; the source gives the
// stages, their RAMs and their latencies.
//
// MAX_CO, the largest co-observation value the PE accepts, sizes the W, X
// and W^T RAMs: that is how a PE built for small CO_i saves on-chip memory.
//
// Interface: rec_valid/rec_ready records from the input buffer; clear with
// clr_busy; idle is high when no point is inside. The accumulation unit reads
// the per-camera RAMs and the S copies through the rd_* / acc_* ports, one
// clock of latency.
module se_pe
  import pba_pkg::*;
#(
  parameter int unsigned MAX_CO = 10,
  parameter int unsigned NCAM   = NCAM_MAX,
  parameter int unsigned Q      = 2,
  parameter int unsigned DEPTH  = NCAM * (NCAM + 1) / 2 * 36,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  output logic             clr_busy,
  input  logic [CAM_W-1:0] ncam,
  input  logic             rec_valid,
  output logic             rec_ready,
  input  pe_rec_t          rec,
  output logic             idle,
  // accumulation read ports
  input  logic [CAM_W-1:0] rd_cam,
  input  logic [4:0]       rd_tri,
  input  logic [2:0]       rd_k,
  input  logic [AW-1:0]    acc_raddr,
  output f32_t             rd_sd,
  output f32_t             rd_r1,
  output f32_t             rd_r4,
  output f32_t [Q-1:0]     acc_rdata,
  // activity counters
  output logic [31:0]      n_points,
  output logic [31:0]      n_bubbles
);
  localparam int OW = $clog2(MAX_CO);

  typedef struct packed {
    logic                         v;
    logic [CO_W-1:0]              co;
    logic [MAX_CO-1:0][CAM_W-1:0] cams;
    f32_t [2:0]                   g;
    logic [1:0]                   wb;
    logic                         xb;
  } slot_t;

  f32_t [2:0] wram  [3][MAX_CO][6];
  f32_t [2:0] xram  [2][MAX_CO][6];
  f32_t [2:0] wtram [2][MAX_CO][6];

  slot_t p2, p3;
  logic  p4_v, p4_xb;
  logic [1:0] wb_next, wb1;
  logic       xb_next, xb1;

  // stage 1
  logic s1_done, s1_busy, s1_clr, adv;
  f32_t [8:0] s1_u;
  f32_t [2:0] s1_g;
  logic [CO_W-1:0] s1_co;
  logic [MAX_CO-1:0][CAM_W-1:0] s1_cams;
  logic w_we;
  logic [OW-1:0] w_obs;
  logic [2:0] w_row;
  f32_t [2:0] w_data;

  se_stage1 #(.MAX_CO(MAX_CO), .NCAM(NCAM)) u_s1 (
    .clk, .rst_n, .clear, .clr_busy(s1_clr), .go(1'b1),
    .rec_valid, .rec_ready, .rec,
    .done(s1_done), .advance(adv), .busy(s1_busy),
    .u_o(s1_u), .g_o(s1_g), .co_o(s1_co), .cams_o(s1_cams),
    .w_we, .w_obs, .w_row, .w_data,
    .rd_cam, .rd_tri, .rd_k, .rd_sd, .rd_r1);

  // stage 2
  logic s2_done;
  f32_t [8:0] s2_inv;
  se_stage2 #(.LATENCY(70)) u_s2 (
    .clk, .rst_n, .start(adv && s1_done), .u(s1_u), .done(s2_done), .inv_o(s2_inv));

  // stage 3
  logic s3_done, x_we;
  logic [OW-1:0] s3_wobs, x_obs;
  logic [2:0] s3_wrow, x_row;
  f32_t [2:0] s3_wdata, x_data, wt_data;
  se_stage3 #(.MAX_CO(MAX_CO)) u_s3 (
    .clk, .rst_n, .start(adv && p2.v), .co(p2.co), .inv(s2_inv), .done(s3_done),
    .w_obs(s3_wobs), .w_row(s3_wrow), .w_data(s3_wdata),
    .x_we, .x_obs, .x_row, .x_data, .wt_data);
  assign s3_wdata = wram[p3.wb][s3_wobs][s3_wrow];

  // stage 4
  logic s4_done, s4_clr;
  logic [Q:0][OW-1:0]   r_xobs;
  logic [Q:0][2:0]      r_xrow;
  f32_t [Q:0][2:0]      r_xdata;
  logic [Q-1:0][OW-1:0] r_wtobs;
  logic [Q-1:0][2:0]    r_wtrow;
  f32_t [Q-1:0][2:0]    r_wtdata;
  se_stage4 #(.MAX_CO(MAX_CO), .NCAM(NCAM), .Q(Q), .DEPTH(DEPTH), .AW(AW)) u_s4 (
    .clk, .rst_n, .clear, .clr_busy(s4_clr), .start(adv && p3.v),
    .co(p3.co), .cams(p3.cams), .g(p3.g), .ncam, .done(s4_done),
    .x_obs(r_xobs), .x_row(r_xrow), .x_data(r_xdata),
    .wt_obs(r_wtobs), .wt_row(r_wtrow), .wt_data(r_wtdata),
    .acc_raddr, .acc_rdata, .rd_cam, .rd_k, .rd_r4);

  always_comb begin
    for (int s = 0; s <= int'(Q); s++) r_xdata[s] = xram[p4_xb][r_xobs[s]][r_xrow[s]];
    for (int s = 0; s < int'(Q); s++)  r_wtdata[s] = wtram[p4_xb][r_wtobs[s]][r_wtrow[s]];
  end

  // Advance when every occupied stage has finished and something can move.
  assign adv = (!p2.v || s2_done) && (!p3.v || s3_done) && (!p4_v || s4_done) &&
               (s1_done || p2.v || p3.v || p4_v);

  assign idle     = !s1_busy && !p2.v && !p3.v && !p4_v;
  assign clr_busy = s1_clr || s4_clr;

  always_ff @(posedge clk) begin
    if (w_we) wram[wb1][w_obs][w_row] <= w_data;
    if (x_we) begin
      xram[p3.xb][x_obs][x_row]  <= x_data;
      wtram[p3.xb][x_obs][x_row] <= wt_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p2 <= '0; p3 <= '0; p4_v <= 1'b0; p4_xb <= 1'b0; wb_next <= '0; xb_next <= 1'b0; wb1 <= '0; xb1 <= 1'b0;
      n_points <= '0; n_bubbles <= '0;
    end else begin
      if (rec_valid && rec_ready && rec.is_hdr) begin
        wb1     <= wb_next;
        xb1     <= xb_next;
        wb_next <= (wb_next == 2'd2) ? 2'd0 : wb_next + 2'd1;
        xb_next <= ~xb_next;
      end
      if (adv) begin
        p2.v    <= s1_done;
        p2.co   <= s1_co;
        p2.cams <= s1_cams;
        p2.g    <= s1_g;
        p2.wb   <= wb1;
        p2.xb   <= xb1;
        p3      <= p2;
        p4_v    <= p3.v;
        p4_xb   <= p3.xb;
        if (!s1_done && s1_busy) n_bubbles <= n_bubbles + 1;
        if (p4_v) n_points <= n_points + 1;
      end
      if (clear) begin
        n_points <= '0; n_bubbles <= '0;
      end
    end
  end
endmodule
