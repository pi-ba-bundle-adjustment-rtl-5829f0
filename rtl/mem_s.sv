// mem_s: on-chip storage of the Schur complement S for one SPU.
//
// S is symmetric, so only the upper block triangle is kept (blocks (j1,j2)
// with j1 <= j2, each a full 6x6 block, row-major, blocks in row-major
// order of the triangle) as the source's storage figure shows; the diagonal
// blocks are kept whole for regularity, as the source also does. For b
// cameras that is b(b+1)/2 blocks of 36 words. The array is written as a
// simple dual-port RAM (one write port, one read port with one clock of read
// latency), the form FPGA block RAM takes.
module mem_s
  import pba_pkg::*;
#(
  parameter int unsigned NCAM  = NCAM_MAX,
  parameter int unsigned DEPTH = NCAM * (NCAM + 1) / 2 * 36,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  f32_t          wdata,
  input  logic [AW-1:0] raddr,
  output f32_t          rdata
);
  f32_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
