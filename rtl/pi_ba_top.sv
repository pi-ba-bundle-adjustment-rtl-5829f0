// pi_ba_top: the Schur-elimination engine on the programmable logic, in
// the configuration with two customised processing elements (two SPUs
// each).
//
// Data path: DMA word stream -> input_buffer -> PE 0 or PE 1 (chosen per
// point by software) -> accumulation_unit -> output buffer (stream_fifo)
// -> DMA. PE 0 (PE_Small) accepts points with CO_i up to 10 and PE 1
// (PE_Large) up to 50, matching the source's split of points with
// CO_i in [2,10] and [5,50] between the two PEs; the exact assignment is
// left to software.
//
// The DMA engine, the processor system and off-chip memory are outside this
// module: the two streams are plain valid/ready ports (s_* in, m_* out with
// m_last on the final word). Command format: see pba_pkg.
//
// Status: err_co is set when a point's CO_i does not fit the chosen PE (the
// point is then dropped); n_points / n_bubbles count points finished and
// pipeline bubbles per PE since the last start command.
module pi_ba_top
  import pba_pkg::*;
#(
  parameter int unsigned NPE        = 2,
  parameter int unsigned Q          = 2,
  parameter int unsigned PE_MAX_CO [NPE] = '{10, 50},
  parameter int unsigned NCAM       = NCAM_MAX,
  parameter int unsigned IN_DEPTH   = 64,
  parameter int unsigned OUT_DEPTH  = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  s_valid,
  output logic                  s_ready,
  input  logic [31:0]           s_data,
  output logic                  m_valid,
  input  logic                  m_ready,
  output logic [31:0]           m_data,
  output logic                  m_last,
  output logic                  err_co,
  output logic                  busy,
  output logic [NPE-1:0][31:0]  n_points,
  output logic [NPE-1:0][31:0]  n_bubbles
);
  localparam int unsigned DEPTH = NCAM * (NCAM + 1) / 2 * 36;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic             start, camd_we, flush, acc_busy, eng_busy;
  logic [CAM_W-1:0] ncam, camd_cam;
  f32_t [5:0]       camd_val;
  logic [NPE-1:0]   pe_idle, pe_clr, rec_valid, rec_ready;
  pe_rec_t          rec;

  logic [CAM_W-1:0]      rd_cam;
  logic [4:0]            rd_tri;
  logic [2:0]            rd_k;
  logic [AW-1:0]         acc_raddr;
  f32_t [NPE-1:0]        rd_sd, rd_r1, rd_r4;
  f32_t [NPE-1:0][Q-1:0] acc_rdata;

  logic       a_valid, a_ready, a_last;
  f32_t       a_data;
  logic [32:0] o_data;

  input_buffer #(.NPE(NPE), .PE_MAX_CO(PE_MAX_CO), .FIFO_DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n, .s_valid, .s_ready, .s_data,
    .start_o(start), .ncam_o(ncam), .camd_we, .camd_cam, .camd_val, .flush_o(flush),
    .busy_i(eng_busy), .pe_idle_i(pe_idle),
    .rec_valid, .rec_ready, .rec_o(rec), .err_co);

  for (genvar p = 0; p < int'(NPE); p++) begin : g_pe
    se_pe #(.MAX_CO(PE_MAX_CO[p]), .NCAM(NCAM), .Q(Q), .DEPTH(DEPTH), .AW(AW)) u_pe (
      .clk, .rst_n, .clear(start), .clr_busy(pe_clr[p]), .ncam,
      .rec_valid(rec_valid[p]), .rec_ready(rec_ready[p]), .rec, .idle(pe_idle[p]),
      .rd_cam, .rd_tri, .rd_k, .acc_raddr,
      .rd_sd(rd_sd[p]), .rd_r1(rd_r1[p]), .rd_r4(rd_r4[p]), .acc_rdata(acc_rdata[p]),
      .n_points(n_points[p]), .n_bubbles(n_bubbles[p]));
  end

  accumulation_unit #(.NPE(NPE), .Q(Q), .NCAM(NCAM), .DEPTH(DEPTH), .AW(AW)) u_acc (
    .clk, .rst_n, .start, .ncam, .camd_we, .camd_cam, .camd_val, .flush, .busy(acc_busy),
    .rd_cam, .rd_tri, .rd_k, .acc_raddr, .rd_sd, .rd_r1, .rd_r4, .acc_rdata,
    .m_valid(a_valid), .m_ready(a_ready), .m_data(a_data), .m_last(a_last));

  stream_fifo #(.WIDTH(33), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .s_valid(a_valid), .s_ready(a_ready), .s_data({a_last, a_data}),
    .m_valid, .m_ready, .m_data(o_data));

  assign m_data   = o_data[31:0];
  assign m_last   = o_data[32];
  assign eng_busy = (|pe_clr) || acc_busy;
  assign busy     = eng_busy || !(&pe_idle);
endmodule
