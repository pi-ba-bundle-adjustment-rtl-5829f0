// stream_fifo: synchronous first-in first-out buffer with valid/ready on
// both sides. Used as the output buffer that holds S and r on their way
// back to DMA, and inside the input buffer for the Jacobian stream.
//
// A word moves when valid and ready are both high at a rising clock edge.
// s_ready is low when DEPTH words are held; m_valid is high whenever a word
// is held, and m_data is that word (read through the array, no extra
// latency). Depths are this design's choice: the source does not size its
// buffers.
module stream_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [WIDTH-1:0] s_data,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [WIDTH-1:0] m_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;
  logic             push, pop;

  assign s_ready = (cnt < (AW+1)'(DEPTH));
  assign m_valid = (cnt != '0);
  assign m_data  = mem[rp];
  assign push    = s_valid & s_ready;
  assign pop     = m_valid & m_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // The count never leaves 0..DEPTH.
  assert property (@(posedge clk) disable iff (!rst_n) cnt <= (AW+1)'(DEPTH));
endmodule
