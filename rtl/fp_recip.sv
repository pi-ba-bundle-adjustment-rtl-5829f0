// fp_recip: sequential single-precision reciprocal, y = 1/x.
//
// This is the divider of stage 2, which forms inv(U) = adj(U) / det(U): the
// determinant is inverted once and the nine cofactors are then multiplied by
// the result. The mantissa quotient floor(2^50 / M) is found by restoring
// division, one quotient bit per clock (28 clocks), then rounded to nearest
// even. A zero input gives infinity; a result below the normal range is
// flushed to zero.
//
// Interface: pulse start with x valid; busy is high while dividing; done
// pulses for one clock with y valid, and y holds until the next start.
// Latency from start to done: 30 clocks. The bit-serial structure is this
// design's choice; the source only gives the divider symbol.
module fp_recip
  import pba_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  f32_t x,
  output logic busy,
  output logic done,
  output f32_t y
);
  logic [24:0] rem;
  logic [23:0] mant;
  logic [27:0] q;
  logic [4:0]  cnt;
  logic        sgn;
  logic [7:0]  ex;
  logic        zero_in;

  logic [24:0] rem_sh;
  always_comb rem_sh = rem << 1;

  // Rounding of the finished quotient.
  function automatic f32_t finish(logic s, logic [7:0] e, logic [27:0] qq, logic rnz);
    if (qq[27]) return (e >= 8'd254) ? {s, 31'd0} : {s, 8'(254 - int'(e)), 23'd0};
    if (e >= 8'd253) return {s, 31'd0};
    return fp_pack(s, 253 - int'(e), {qq[26:1], qq[0] | rnz});
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= F32_ZERO;
      rem <= '0; mant <= '0; q <= '0; cnt <= '0; sgn <= 1'b0; ex <= '0; zero_in <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy    <= 1'b1;
        sgn     <= x[31];
        ex      <= x[30:23];
        zero_in <= (x[30:23] == 8'd0);
        mant    <= {1'b1, x[22:0]};
        rem     <= 25'd1 << 22;
        q       <= '0;
        cnt     <= '0;
      end else if (busy) begin
        if (cnt == 5'd28) begin
          busy <= 1'b0;
          done <= 1'b1;
          y    <= zero_in ? {sgn, 8'hFF, 23'd0} : finish(sgn, ex, q, rem != '0);
        end else begin
          cnt <= cnt + 5'd1;
          if (rem_sh >= {1'b0, mant}) begin
            rem <= rem_sh - {1'b0, mant};
            q   <= {q[26:0], 1'b1};
          end else begin
            rem <= rem_sh;
            q   <= {q[26:0], 1'b0};
          end
        end
      end
    end
  end
endmodule
