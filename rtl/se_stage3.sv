// se_stage3: third stage of the processing element, X_ij = -W_ij x inv for
// every observation j of the point.
//
// W_ij (6x3) is read one row at a time from the W RAM written by stage 1.
// Each entry of X is a 3-term dot product of a W row with a column of inv,
// formed in two clocks by two multiplier/adder pairs and one adder (the
// stage-3 column of the architecture figure):
//   clock a : p = W[r][0]*inv[0][c],  q = W[r][1]*inv[1][c]
//   clock b : X[r][c] = -((W[r][2]*inv[2][c] + p) + q)
// 18 entries x 2 clocks = 36 clocks per observation, the 36*CO_i latency the
// source gives. When a row of X is finished it is written to the X RAM, and
// the W row is copied at the same moment to the W^T RAM that stage 4 reads,
// so that stage 1 may overwrite its W RAM bank for a later point. The
// two-clock schedule is this design's own.
//
// Interface: start pulses with co and inv valid; done stays high until the
// next start. The W RAM is read combinationally through w_obs / w_row.
module se_stage3
  import pba_pkg::*;
#(
  parameter int unsigned MAX_CO = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [CO_W-1:0]           co,
  input  f32_t [8:0]                inv,
  output logic                      done,
  output logic [$clog2(MAX_CO)-1:0] w_obs,
  output logic [2:0]                w_row,
  input  f32_t [2:0]                w_data,
  output logic                      x_we,
  output logic [$clog2(MAX_CO)-1:0] x_obs,
  output logic [2:0]                x_row,
  output f32_t [2:0]                x_data,
  output f32_t [2:0]                wt_data
);
  localparam int OW = $clog2(MAX_CO);

  logic            run;
  logic [CO_W-1:0] co_q, obs;
  logic [2:0]      row;
  logic [1:0]      col;
  logic            ph;
  f32_t [8:0]      iv;
  f32_t            p, q;
  f32_t [1:0]      xr;
  f32_t            y1, y2, s2;

  assign w_obs = OW'(obs);
  assign w_row = row;

  fp_mul_add u_m1 (.a(w_data[ph ? 2 : 0]), .b(iv[(ph ? 6 : 0) + int'(col)]),
                   .c(ph ? p : F32_ZERO), .y(y1));
  fp_mul_add u_m2 (.a(w_data[1]), .b(iv[3 + int'(col)]), .c(F32_ZERO), .y(y2));
  always_comb s2 = fp_neg(fp_add(y1, q));

  assign x_we    = run && ph && (col == 2'd2);
  assign x_obs   = OW'(obs);
  assign x_row   = row;
  assign x_data  = {s2, xr[1], xr[0]};
  assign wt_data = w_data;
  assign done    = !run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; co_q <= '0; obs <= '0; row <= '0; col <= '0; ph <= 1'b0;
      iv <= '0; p <= '0; q <= '0; xr <= '0;
    end else if (start) begin
      run <= (co != '0); co_q <= co; iv <= inv;
      obs <= '0; row <= '0; col <= '0; ph <= 1'b0;
    end else if (run) begin
      ph <= ~ph;
      if (!ph) begin
        p <= y1;
        q <= y2;
      end else begin
        if (col != 2'd2) begin
          xr[col[0]] <= s2;
          col <= col + 2'd1;
        end else begin
          col <= '0;
          if (row == 3'd5) begin
            row <= '0;
            obs <= obs + 1'b1;
            if (obs + 1'b1 == co_q) run <= 1'b0;
          end else begin
            row <= row + 3'd1;
          end
        end
      end
    end
  end
endmodule
