// se_stage1: first stage of the Schur-elimination processing element
// (lines 4-11 of the Schur elimination algorithm).
//
// For one point i it takes the header (CO_i and the diagonal of
// mu*Dp_i^T*Dp_i, which initialises U_i) and then CO_i observation records.
// Each observation is processed in 36 clocks by four multiplier/adder
// groups working side by side, as in the stage-1 column of the
// architecture figure:
//   group U/g : U_i += Jp^T Jp   (9 entries x 2 products, clocks 0-17)
//               g_i += Jp^T eps  (3 entries x 2 products, clocks 18-23)
//   group W   : W_ij = Jc^T Jp   (18 entries x 2 products, clocks 0-35),
//               written to the W RAM one 3-float row at a time
//   group S/r (two multipliers): the upper half (21 entries) of
//               Jc^T Jc is added into the per-camera "diagonal block of S"
//               RAM and Jc^T eps (6 entries) into the per-camera r' RAM.
// One product per multiplier per clock, so the stage computes for 36 clocks per
// observation; taking each observation record costs one more clock, so a
// point takes 37*CO_i clocks against the 36*CO_i the source gives (this
// design's simplification: the record is not prefetched during the run).
//
// The clock-by-clock schedule is this design's own.
//
// Handshake: while idle and go is high the stage takes a header record;
// it then takes CO_i observation records (rec_valid/rec_ready). done stays
// high, with u_o, g_o, cams_o and co_o valid, until advance.
// clear zeroes the per-camera RAMs (one camera per clock, clr_busy high).
// The accumulation unit reads those RAMs through rd_* with one clock of
// latency.
module se_stage1
  import pba_pkg::*;
#(
  parameter int unsigned MAX_CO = 10,
  parameter int unsigned NCAM   = NCAM_MAX
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  output logic                       clr_busy,
  input  logic                       go,
  input  logic                       rec_valid,
  output logic                       rec_ready,
  input  pe_rec_t                    rec,
  output logic                       done,
  input  logic                       advance,
  output logic                       busy,
  output f32_t [8:0]                 u_o,
  output f32_t [2:0]                 g_o,
  output logic [CO_W-1:0]            co_o,
  output logic [MAX_CO-1:0][CAM_W-1:0] cams_o,
  // W RAM write port (row r of W_ij for local observation index)
  output logic                       w_we,
  output logic [$clog2(MAX_CO)-1:0]  w_obs,
  output logic [2:0]                 w_row,
  output f32_t [2:0]                 w_data,
  // read port for the accumulation unit
  input  logic [CAM_W-1:0]           rd_cam,
  input  logic [4:0]                 rd_tri,
  input  logic [2:0]                 rd_k,
  output f32_t                       rd_sd,
  output f32_t                       rd_r1
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RUN, S_DONE} st_e;
  st_e st;

  f32_t sd [NCAM][21];
  f32_t r1 [NCAM][6];

  obs_t             o;
  logic [5:0]       cyc;
  logic [CO_W-1:0]  ocnt;
  f32_t [8:0]       u;
  f32_t [2:0]       g;
  f32_t             wacc, tmp_a, tmp_b;
  f32_t [1:0]       wrow;
  logic [CAM_W-1:0] clr_cam;

  // Row and column of each of the 21 stored entries of a 6x6 upper triangle.
  function automatic logic [5:0] tri_rc(int e);
    int n = 0;
    for (int r = 0; r < 6; r++)
      for (int c = r; c < 6; c++) begin
        if (n == e) return {3'(r), 3'(c)};
        n++;
      end
    return '0;
  endfunction

  // ---- clock-by-clock operand selection ----
  logic       k;
  logic [4:0] e2;           // cyc >> 1
  f32_t ua, ub, uc, uy;     // group U/g
  f32_t wa, wb, wc, wy;     // group W
  f32_t aa, ab, ac, ay;     // group S/r, multiplier A
  f32_t ba, bb, bc, by;     // group S/r, multiplier B
  logic [4:0] tri_a, tri_b;
  logic       b_is_sd, b_act, u_act, g_act;
  logic [2:0] wr, wcol;

  assign k  = cyc[0];
  assign e2 = cyc[5:1];

  always_comb begin
    logic [5:0] rc;
    int ei;
    // group U/g
    u_act = (cyc < 6'd18);
    g_act = (cyc >= 6'd18) && (cyc < 6'd24);
    ei = int'(e2);
    if (u_act) begin
      ua = o.jp[k][ei / 3];
      ub = o.jp[k][ei % 3];
      uc = u[ei];
    end else begin
      ua = o.jp[k][(ei - 9) % 3];
      ub = o.eps[k];
      uc = g[(ei - 9) % 3];
    end
    // group W: entry e2 = row*3 + col
    wr   = 3'(ei / 3);
    wcol = 3'(ei % 3);
    wa = o.jc[k][wr];
    wb = o.jp[k][wcol];
    wc = k ? wacc : F32_ZERO;
    // group S/r, multiplier A: triangle entries 0-17
    tri_a = e2;
    rc = tri_rc(int'(tri_a));
    aa = o.jc[k][rc[5:3]];
    ab = o.jc[k][rc[2:0]];
    ac = k ? tmp_a : sd[o.cam][tri_a];
    // multiplier B: triangle entries 18-20 (clocks 0-5), r' (clocks 6-17)
    b_act   = (cyc < 6'd18);
    b_is_sd = (cyc < 6'd6);
    tri_b   = 5'd18 + 5'(cyc[2:1]);
    rc = tri_rc(int'(tri_b));
    if (b_is_sd) begin
      ba = o.jc[k][rc[5:3]];
      bb = o.jc[k][rc[2:0]];
      bc = k ? tmp_b : sd[o.cam][tri_b];
    end else begin
      ba = o.jc[k][(ei - 3) % 6];
      bb = o.eps[k];
      bc = k ? tmp_b : r1[o.cam][(ei - 3) % 6];
    end
  end

  fp_mul_add u_mac_u (.a(ua), .b(ub), .c(uc), .y(uy));
  fp_mul_add u_mac_w (.a(wa), .b(wb), .c(wc), .y(wy));
  fp_mul_add u_mac_a (.a(aa), .b(ab), .c(ac), .y(ay));
  fp_mul_add u_mac_b (.a(ba), .b(bb), .c(bc), .y(by));

  assign rec_ready = ((st == S_IDLE) && go && rec.is_hdr) || ((st == S_WAIT) && !rec.is_hdr);
  assign done      = (st == S_DONE);
  assign busy      = (st != S_IDLE);
  assign u_o       = u;
  assign g_o       = g;
  assign clr_busy  = (clr_cam != '0) || clear;

  assign w_we   = (st == S_RUN) && k && (wcol == 3'd2);
  assign w_obs  = $bits(w_obs)'(ocnt);
  assign w_row  = wr;
  assign w_data = {wy, wrow[1], wrow[0]};

  // Per-camera RAMs: accumulation, clearing, read port.
  always_ff @(posedge clk) begin
    if (clear || clr_cam != '0) begin
      for (int i = 0; i < 21; i++) sd[clear ? 0 : clr_cam][i] <= F32_ZERO;
      for (int i = 0; i < 6; i++)  r1[clear ? 0 : clr_cam][i] <= F32_ZERO;
    end else if (st == S_RUN) begin
      if (k) sd[o.cam][tri_a] <= ay;
      if (k && b_act) begin
        if (b_is_sd) sd[o.cam][tri_b] <= by;
        else         r1[o.cam][(int'(e2) - 3) % 6] <= by;
      end
    end
    rd_sd <= sd[rd_cam][rd_tri];
    rd_r1 <= r1[rd_cam][rd_k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; o <= '0; cyc <= '0; ocnt <= '0; u <= '0; g <= '0;
      wacc <= '0; tmp_a <= '0; tmp_b <= '0; wrow <= '0; co_o <= '0; cams_o <= '0;
      clr_cam <= '0;
    end else begin
      if (clear)                clr_cam <= (NCAM > 1) ? CAM_W'(1) : '0;
      else if (clr_cam != '0)   clr_cam <= (int'(clr_cam) == NCAM - 1) ? '0 : clr_cam + 1'b1;
      unique case (st)
        S_IDLE: if (go && rec_valid && rec.is_hdr) begin
          co_o <= rec.co;
          ocnt <= '0;
          u    <= '0;
          u[0] <= rec.dp[0];
          u[4] <= rec.dp[1];
          u[8] <= rec.dp[2];
          g    <= '0;
          st   <= S_WAIT;
        end
        S_WAIT: if (rec_valid && !rec.is_hdr) begin
          o   <= rec.obs;
          cams_o[ocnt] <= rec.obs.cam;
          cyc <= '0;
          st  <= S_RUN;
        end
        S_RUN: begin
          if (u_act) u[e2] <= uy;
          if (g_act) g[e2 - 5'd9] <= uy;
          if (!k) begin
            wacc  <= wy;
            tmp_a <= ay;
            tmp_b <= by;
          end else if (wcol != 3'd2) begin
            wrow[wcol[0]] <= wy;
          end
          if (cyc == 6'd35) begin
            ocnt <= ocnt + 1'b1;
            st   <= (ocnt + 1'b1 == co_o) ? S_DONE : S_WAIT;
          end
          cyc <= cyc + 6'd1;
        end
        S_DONE: if (advance) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // A point's observations must come in ascending camera order, so that
  // every pair (j1, j2) of the point has j1 < j2.
  assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_WAIT && rec_valid && !rec.is_hdr && ocnt != '0) |-> rec.obs.cam > cams_o[ocnt - 1'b1])
    else $error("camera order: %0d after %0d (ocnt %0d)", rec.obs.cam, cams_o[ocnt - 1'b1], ocnt);
endmodule
