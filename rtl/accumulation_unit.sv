// accumulation_unit: forms the final S and r from the partial results held
// in the processing elements, and adds line 2 of the Schur elimination
// algorithm, S_jj := mu*Dc_j^T*Dc_j.
//
// After a flush every PE holds, per camera, the diagonal blocks of
// Jc^T Jc and the vector Jc^T eps written by stage 1, the vector
// -W inv g written by stage 4, and one copy of the S update per SPU. The
// unit walks the output in order, the upper block triangle of S (blocks
// (j1,j2), j1 <= j2, 36 words each, row-major) followed by r (6 words per
// camera), and for each word reads all sources at the same address, then
// adds them with a single adder, one term per clock:
//   S word : sum over PEs of (every SPU copy + diagonal-block RAM if j1==j2)
//            + mu*Dc^T*Dc if the word is on the diagonal of S
//   r word : sum over PEs of (stage-1 r' + stage-4 r')
// Each finished word goes to the output buffer (valid/ready, last on the
// final word of r). One word takes NPE*(Q+1)+1 clocks plus three, more if the
// output buffer is full. The source names the unit and its job; the
// term-serial adder and the word order are this design's own.
//
// Interface: start clears the diagonal store and sets b; camd_we loads the
// six diagonal values of one camera; flush starts the walk, busy is high
// until the last word has been handed over.
module accumulation_unit
  import pba_pkg::*;
#(
  parameter int unsigned NPE   = 2,
  parameter int unsigned Q     = 2,
  parameter int unsigned NCAM  = NCAM_MAX,
  parameter int unsigned DEPTH = NCAM * (NCAM + 1) / 2 * 36,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [CAM_W-1:0]          ncam,
  input  logic                      camd_we,
  input  logic [CAM_W-1:0]          camd_cam,
  input  f32_t [5:0]                camd_val,
  input  logic                      flush,
  output logic                      busy,
  // read addresses broadcast to the PEs
  output logic [CAM_W-1:0]          rd_cam,
  output logic [4:0]                rd_tri,
  output logic [2:0]                rd_k,
  output logic [AW-1:0]             acc_raddr,
  input  f32_t [NPE-1:0]            rd_sd,
  input  f32_t [NPE-1:0]            rd_r1,
  input  f32_t [NPE-1:0]            rd_r4,
  input  f32_t [NPE-1:0][Q-1:0]     acc_rdata,
  // to the output buffer
  output logic                      m_valid,
  input  logic                      m_ready,
  output f32_t                      m_data,
  output logic                      m_last
);
  localparam int NT = NPE * (Q + 1) + 1;

  typedef enum logic [2:0] {A_IDLE, A_ADDR, A_LATCH, A_SUM, A_OUT} st_e;
  st_e st;

  f32_t mudc [NCAM][6];
  logic [CAM_W-1:0] nb, j1, j2;
  logic [5:0]       e;
  logic [2:0]       k;
  logic             phase_r;
  f32_t [NT-1:0]    terms;
  logic [$clog2(NT+1)-1:0] t;
  f32_t             acc;
  logic             diag, last_word;

  assign diag      = (j1 == j2);
  assign rd_cam    = j1;
  assign rd_tri    = tri6(3'(e / 6), 3'(e % 6));
  assign rd_k      = k;
  assign busy      = (st != A_IDLE) || flush;
  assign m_valid   = (st == A_OUT);
  assign m_data    = acc;
  assign last_word = phase_r && (j1 + 1'b1 == nb) && (k == 3'd5);
  assign m_last    = last_word;

  always_ff @(posedge clk) begin
    if (start) begin
      for (int c = 0; c < int'(NCAM); c++)
        for (int i = 0; i < 6; i++) mudc[c][i] <= F32_ZERO;
    end else if (camd_we) begin
      for (int i = 0; i < 6; i++) mudc[camd_cam][i] <= camd_val[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; nb <= '0; j1 <= '0; j2 <= '0; e <= '0; k <= '0; phase_r <= 1'b0;
      terms <= '0; t <= '0; acc <= '0; acc_raddr <= '0;
    end else begin
      if (start) nb <= ncam;
      unique case (st)
        A_IDLE: if (flush) begin
          j1 <= '0; j2 <= '0; e <= '0; k <= '0; acc_raddr <= '0;
          phase_r <= 1'b0;
          st <= (nb == '0) ? A_IDLE : A_ADDR;
        end
        A_ADDR: st <= A_LATCH;
        A_LATCH: begin
          terms <= '0;
          for (int p = 0; p < int'(NPE); p++) begin
            if (!phase_r) begin
              for (int s = 0; s < int'(Q); s++) terms[p * (Q + 1) + s] <= acc_rdata[p][s];
              terms[p * (Q + 1) + Q] <= diag ? rd_sd[p] : F32_ZERO;
            end else begin
              terms[p * (Q + 1)]     <= rd_r1[p];
              terms[p * (Q + 1) + 1] <= rd_r4[p];
            end
          end
          terms[NT - 1] <= (!phase_r && diag && (e / 6 == e % 6)) ? mudc[j1][e / 6] : F32_ZERO;
          acc <= F32_ZERO;
          t   <= '0;
          st  <= A_SUM;
        end
        A_SUM: begin
          acc <= fp_add(acc, terms[t]);
          t   <= t + 1'b1;
          if (int'(t) == NT - 1) st <= A_OUT;
        end
        A_OUT: if (m_ready) begin
          st <= A_ADDR;
          if (!phase_r) begin
            acc_raddr <= acc_raddr + 1'b1;
            if (e == 6'd35) begin
              e <= '0;
              if (j2 + 1'b1 == nb) begin
                if (j1 + 1'b1 == nb) begin
                  phase_r <= 1'b1;
                  j1 <= '0;
                  k  <= '0;
                end else begin
                  j1 <= j1 + 1'b1;
                  j2 <= j1 + 1'b1;
                end
              end else begin
                j2 <= j2 + 1'b1;
              end
            end else begin
              e <= e + 6'd1;
            end
          end else begin
            if (k == 3'd5) begin
              k <= '0;
              j1 <= j1 + 1'b1;
              if (last_word) st <= A_IDLE;
            end else begin
              k <= k + 3'd1;
            end
          end
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
