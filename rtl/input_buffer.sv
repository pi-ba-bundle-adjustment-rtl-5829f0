// input_buffer: receives the 32-bit word stream from DMA, buffers it, and
// turns it into commands and per-PE records.
//
// The words first pass through a FIFO (FIFO_DEPTH words). A parser then reads
// commands (format in pba_pkg): OP_START clears the engine and sets the
// number of cameras b; OP_CAMD loads the diagonal of mu*Dc_j^T*Dc_j for one
// camera into the accumulation unit; OP_POINT carries a point header and its
// CO_i observation records, which are delivered as pe_rec_t records to the
// PE named in the header; OP_FLUSH waits until every PE is idle and then
// starts the accumulation unit.
//
// The choice of PE for each point is made by software (the source assigns
// points with CO_i in [2,10] to the first PE and [5,50] to the second from a
// software controller); the hardware only checks that CO_i is between 1 and
// the PE's MAX_CO. A point that breaks this rule is read and discarded and
// err_co is set until the next OP_START.
//
// Timing: one word per clock while a record is being gathered; each record
// is then held on rec_o until the PE takes it (rec_valid/rec_ready). A
// command that needs the engine (OP_START, OP_FLUSH) waits for busy_i low.
// The word format and the parser are this design's own.
module input_buffer
  import pba_pkg::*;
#(
  parameter int unsigned NPE = 2,
  parameter int unsigned PE_MAX_CO [NPE] = '{10, 50},
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  // word stream from DMA
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [31:0]      s_data,
  // commands
  output logic             start_o,
  output logic [CAM_W-1:0] ncam_o,
  output logic             camd_we,
  output logic [CAM_W-1:0] camd_cam,
  output f32_t [5:0]       camd_val,
  output logic             flush_o,
  input  logic             busy_i,     // clearing or accumulating
  input  logic [NPE-1:0]   pe_idle_i,
  // records to the PEs
  output logic [NPE-1:0]   rec_valid,
  input  logic [NPE-1:0]   rec_ready,
  output pe_rec_t          rec_o,
  output logic             err_co
);
  typedef enum logic [2:0] {
    P_CMD, P_CAMD, P_DP, P_OBS, P_REC, P_FLUSH, P_WAIT
  } pstate_e;

  pstate_e          st;
  logic             w_valid, w_ready;
  logic [31:0]      w;
  logic [31:0]      buf_w [21];
  logic [4:0]       wcnt;
  logic [CO_W-1:0]  ocnt, co;
  logic             pe_sel, drop;
  logic             rec_is_hdr;

  stream_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .s_valid, .s_ready, .s_data,
    .m_valid(w_valid), .m_ready(w_ready), .m_data(w));

  assign w_ready = (st == P_CAMD) || (st == P_DP) || (st == P_OBS) ||
                   ((st == P_CMD) && !(w_valid && (w[31:28] == OP_START || w[31:28] == OP_FLUSH) && busy_i));

  logic take;
  assign take = w_valid && w_ready;

  // Record assembled from the gathered words.
  always_comb begin
    rec_o        = '0;
    rec_o.is_hdr = rec_is_hdr;
    rec_o.co     = co;
    for (int c = 0; c < 3; c++) rec_o.dp[c] = buf_w[c];
    rec_o.obs.cam = buf_w[0][CAM_W-1:0];
    for (int k = 0; k < 2; k++) begin
      for (int c = 0; c < 3; c++) rec_o.obs.jp[k][c] = buf_w[1 + k*3 + c];
      for (int c = 0; c < 6; c++) rec_o.obs.jc[k][c] = buf_w[7 + k*6 + c];
      rec_o.obs.eps[k] = buf_w[19 + k];
    end
  end

  always_comb begin
    rec_valid = '0;
    if (st == P_REC) rec_valid[pe_sel] = 1'b1;
  end

  always_comb begin
    camd_cam = buf_w[20][CAM_W-1:0];
    for (int c = 0; c < 6; c++) camd_val[c] = buf_w[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_CMD; wcnt <= '0; ocnt <= '0; co <= '0; pe_sel <= 1'b0; drop <= 1'b0;
      rec_is_hdr <= 1'b0; start_o <= 1'b0; ncam_o <= '0; camd_we <= 1'b0;
      flush_o <= 1'b0; err_co <= 1'b0;
      for (int i = 0; i < 21; i++) buf_w[i] <= '0;
    end else begin
      start_o <= 1'b0;
      camd_we <= 1'b0;
      flush_o <= 1'b0;
      unique case (st)
        P_CMD: if (take) begin
          wcnt <= '0;
          unique case (w[31:28])
            OP_START: begin
              start_o <= 1'b1;
              ncam_o  <= w[CAM_W-1:0];
              err_co  <= 1'b0;
              st      <= P_WAIT;
            end
            OP_CAMD: begin
              buf_w[20] <= w;
              st <= P_CAMD;
            end
            OP_POINT: begin
              co     <= w[16 +: CO_W];
              pe_sel <= w[8];
              ocnt   <= '0;
              if (w[16 +: CO_W] == '0 ||
                  int'(w[16 +: CO_W]) > int'(PE_MAX_CO[w[8]])) begin
                drop   <= 1'b1;
                err_co <= 1'b1;
              end else begin
                drop <= 1'b0;
              end
              st <= P_DP;
            end
            OP_FLUSH: st <= P_FLUSH;
            default: ;
          endcase
        end
        P_CAMD: if (take) begin
          buf_w[wcnt] <= w;
          wcnt <= wcnt + 5'd1;
          if (wcnt == 5'd5) begin
            camd_we <= 1'b1;
            st <= P_CMD;
          end
        end
        P_DP: if (take) begin
          buf_w[wcnt] <= w;
          wcnt <= wcnt + 5'd1;
          if (wcnt == 5'd2) begin
            wcnt       <= '0;
            rec_is_hdr <= 1'b1;
            st         <= drop ? P_OBS : P_REC;
          end
        end
        P_OBS: if (take) begin
          buf_w[wcnt] <= w;
          wcnt <= wcnt + 5'd1;
          if (wcnt == 5'd20) begin
            wcnt       <= '0;
            rec_is_hdr <= 1'b0;
            ocnt       <= ocnt + 1'b1;
            if (drop) st <= (ocnt + 1'b1 == co) ? P_CMD : P_OBS;
            else      st <= P_REC;
          end
        end
        P_REC: if (rec_ready[pe_sel]) begin
          if (rec_is_hdr)    st <= P_OBS;
          else if (ocnt == co) st <= P_CMD;
          else               st <= P_OBS;
        end
        P_FLUSH: if (&pe_idle_i && !busy_i) begin
          flush_o <= 1'b1;
          st      <= P_WAIT;
        end
        P_WAIT: if (!busy_i && !start_o && !flush_o) st <= P_CMD;
        default: st <= P_CMD;
      endcase
    end
  end
endmodule
