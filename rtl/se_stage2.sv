// se_stage2: second stage of the processing element, inv = U_i^-1
// (line 12 of the Schur elimination algorithm).
//
// Following the source, the 3x3 matrix is inverted through its adjugate and
// determinant, inv = adj(U)/det(U), instead of a Cholesky factorisation with
// its chain of square roots. The hardware is one multiplier/adder pair and
// the divider of the stage-2 column of the architecture figure:
//   clocks  0-17 : the nine adjugate entries, two clocks each
//                  (t = m[c]*m[d], then adj = m[a]*m[b] - t)
//   clocks 18-20 : det = m0*adj0 + m1*adj3 + m2*adj6
//   clocks 21-51 : rdet = 1/det in fp_recip
//   next 9 clocks: inv[n] = adj[n] * rdet
// The source states a fixed stage-2 latency of 70 clocks; the sequence above
// needs fewer, and done is raised LATENCY clocks after start so that the
// stage keeps the latency the source gives. The clock schedule is this
// design's own.
//
// Interface: start pulses with u valid (row-major 3x3); done stays high with
// inv_o valid until the next start.
module se_stage2
  import pba_pkg::*;
#(
  parameter int unsigned LATENCY = 70
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  f32_t [8:0] u,
  output logic       done,
  output f32_t [8:0] inv_o
);
  typedef enum logic [2:0] {T_IDLE, T_ADJ, T_DET, T_DIV, T_SCALE, T_HOLD, T_DONE} st_e;
  st_e st;

  // adj[n] = m[A]*m[B] - m[C]*m[D]
  localparam int A_IX [9] = '{4, 2, 1, 5, 0, 2, 3, 1, 0};
  localparam int B_IX [9] = '{8, 7, 5, 6, 8, 3, 7, 6, 4};
  localparam int C_IX [9] = '{5, 1, 2, 3, 2, 0, 4, 0, 1};
  localparam int D_IX [9] = '{7, 8, 4, 8, 6, 5, 6, 7, 3};

  f32_t [8:0] m, adj, inv;
  f32_t       t, det, rdet;
  logic [6:0] cnt;
  logic [3:0] n;
  logic       ph;
  f32_t       ma, mb, mc, my;
  logic       rc_start, rc_busy, rc_done;
  f32_t       rc_y;

  always_comb begin
    ma = F32_ZERO; mb = F32_ZERO; mc = F32_ZERO;
    unique case (st)
      T_ADJ: begin
        if (!ph) begin ma = m[C_IX[n]]; mb = m[D_IX[n]]; mc = F32_ZERO; end
        else     begin ma = m[A_IX[n]]; mb = m[B_IX[n]]; mc = fp_neg(t); end
      end
      T_DET:   begin ma = m[n];   mb = adj[3 * n]; mc = det; end
      T_SCALE: begin ma = adj[n]; mb = rdet;       mc = F32_ZERO; end
      default: ;
    endcase
  end

  fp_mul_add u_mac (.a(ma), .b(mb), .c(mc), .y(my));
  fp_recip   u_div (.clk, .rst_n, .start(rc_start), .x(det), .busy(rc_busy), .done(rc_done), .y(rc_y));

  assign rc_start = (st == T_DIV) && !rc_busy && (n == 4'd0);
  assign done     = (st == T_DONE);
  assign inv_o    = inv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; m <= '0; adj <= '0; inv <= '0; t <= '0; det <= '0; rdet <= '0;
      cnt <= '0; n <= '0; ph <= 1'b0;
    end else begin
      if (st != T_IDLE && st != T_DONE) cnt <= cnt + 7'd1;
      if (start) begin
        m <= u; cnt <= 7'd1; n <= '0; ph <= 1'b0; det <= F32_ZERO;
        st <= T_ADJ;
      end else begin
        unique case (st)
          T_ADJ: begin
            ph <= ~ph;
            if (!ph) t <= my;
            else begin
              adj[n] <= my;
              n <= (n == 4'd8) ? 4'd0 : n + 4'd1;
              if (n == 4'd8) st <= T_DET;
            end
          end
          T_DET: begin
            det <= my;
            n <= (n == 4'd2) ? 4'd0 : n + 4'd1;
            if (n == 4'd2) st <= T_DIV;
          end
          T_DIV: begin
            n <= 4'd1;                   // recip started once
            if (rc_done) begin
              rdet <= rc_y;
              n  <= 4'd0;
              st <= T_SCALE;
            end
          end
          T_SCALE: begin
            inv[n] <= my;
            n <= n + 4'd1;
            if (n == 4'd8) st <= T_HOLD;
          end
          T_HOLD: if (cnt >= 7'(LATENCY - 1)) st <= T_DONE;
          default: ;
        endcase
      end
    end
  end

  // The schedule must fit in the stated latency.
  assert property (@(posedge clk) disable iff (!rst_n)
    (st == T_SCALE) |-> (cnt < 7'(LATENCY)));
endmodule
