// spu: matrix S processing unit, the fourth-stage engine that performs
// S_j1j2 -= W_ij1 * inv * W_ij2^T (line 16 of the Schur elimination
// algorithm) for all camera pairs j1 <= j2 of a point.
//
// Stage 3 has already formed X_ij = -W_ij * inv, so each entry of a 6x6
// block is S[r][c] += X_a[r] . W_b[c] (a 3-term dot product of a row of X
// and a row of W). The unit takes one entry per clock: it reads the two
// rows combinationally, multiplies and adds them in a fully parallel
// 3-product chain, and adds the result into its own copy of S in mem_s
// (read this clock, written the next). With Q units side by side, unit LANE
// takes the entries LANE, LANE+Q, LANE+2Q, ... of the concatenated list of
// the point's CO_i(CO_i+1)/2 blocks, so the work 36*CO_i(CO_i+1)/2 is split
// evenly and the stage takes about 18(CO_i^2+CO_i)/Q clocks, the figure the
// source gives. Each unit keeps its own S copy, as the source's doubling of
// S storage with two SPUs implies; the accumulation unit adds the copies.
// Splitting by entries rather than by blocks is this design's choice.
//
// Interface: start pulses with co, cams and ncam (b) valid; done is high
// when idle. clear zeroes the whole copy (one word per clock, clr_busy
// high). When idle, acc_raddr reads the copy with one clock of latency.
module spu
  import pba_pkg::*;
#(
  parameter int unsigned MAX_CO = 10,
  parameter int unsigned NCAM   = NCAM_MAX,
  parameter int unsigned Q      = 2,
  parameter int unsigned LANE   = 0,
  parameter int unsigned DEPTH  = NCAM * (NCAM + 1) / 2 * 36,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  output logic                          clr_busy,
  input  logic                          start,
  input  logic [CO_W-1:0]               co,
  input  logic [MAX_CO-1:0][CAM_W-1:0]  cams,
  input  logic [CAM_W-1:0]              ncam,
  output logic                          done,
  // X RAM and W^T RAM read ports
  output logic [$clog2(MAX_CO)-1:0]     x_obs,
  output logic [2:0]                    x_row,
  input  f32_t [2:0]                    x_data,
  output logic [$clog2(MAX_CO)-1:0]     wt_obs,
  output logic [2:0]                    wt_row,
  input  f32_t [2:0]                    wt_data,
  // accumulation read port
  input  logic [AW-1:0]                 acc_raddr,
  output f32_t                          acc_rdata
);
  localparam int OW = $clog2(MAX_CO);

  logic                         run, v1, clr_run;
  logic [CO_W-1:0]              co_q, a, b;
  logic [5:0]                   e;
  logic [MAX_CO-1:0][CAM_W-1:0] cams_q;
  logic [AW-1:0]                addr, addr1, clr_addr;
  f32_t                         d1, d2, d3, dot1, sum;
  logic                         we;
  logic [AW-1:0]                waddr, raddr;
  f32_t                         wdata, rdata;

  assign x_obs  = OW'(a);
  assign x_row  = 3'(e / 6);
  assign wt_obs = OW'(b);
  assign wt_row = 3'(e % 6);

  always_comb addr = AW'(int'(blk_index(cams_q[a], cams_q[b], ncam)) * 36 + int'(e));

  fp_mul_add u_d1 (.a(x_data[0]), .b(wt_data[0]), .c(F32_ZERO), .y(d1));
  fp_mul_add u_d2 (.a(x_data[1]), .b(wt_data[1]), .c(d1), .y(d2));
  fp_mul_add u_d3 (.a(x_data[2]), .b(wt_data[2]), .c(d2), .y(d3));
  always_comb sum = fp_add(rdata, dot1);

  assign raddr     = run ? addr : acc_raddr;
  assign we        = v1 || clr_run;
  assign waddr     = clr_run ? clr_addr : addr1;
  assign wdata     = clr_run ? F32_ZERO : sum;
  assign acc_rdata = rdata;
  assign done      = !run && !v1;
  assign clr_busy  = clr_run || clear;

  mem_s #(.NCAM(NCAM), .DEPTH(DEPTH), .AW(AW)) u_mem (
    .clk, .we, .waddr, .wdata, .raddr, .rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; v1 <= 1'b0; co_q <= '0; a <= '0; b <= '0; e <= '0; cams_q <= '0;
      addr1 <= '0; dot1 <= '0; clr_run <= 1'b0; clr_addr <= '0;
    end else begin
      if (clear) begin
        clr_run <= 1'b1; clr_addr <= '0;
      end else if (clr_run) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == AW'(DEPTH - 1)) clr_run <= 1'b0;
      end
      v1    <= run;
      addr1 <= addr;
      dot1  <= d3;
      if (start) begin
        co_q <= co; cams_q <= cams; a <= '0; b <= '0; e <= 6'(LANE);
        run  <= (co != '0) && (LANE < 36 * int'(co) * (int'(co) + 1) / 2);
      end else if (run) begin
        if (int'(e) + int'(Q) >= 36) begin
          e <= 6'(int'(e) + int'(Q) - 36);
          if (b + 1'b1 == co_q) begin
            if (a + 1'b1 == co_q) run <= 1'b0;
            a <= a + 1'b1;
            b <= a + 1'b1;
          end else begin
            b <= b + 1'b1;
          end
        end else begin
          e <= e + 6'(Q);
        end
      end
    end
  end

  // Read-after-write: an entry is never read while its update is pending.
  assert property (@(posedge clk) disable iff (!rst_n) (run && v1) |-> (addr != addr1));
endmodule
