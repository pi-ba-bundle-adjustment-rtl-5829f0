// tb_mem_s: writes random words to random addresses of a small S store,
// keeps a shadow copy, and checks reads one clock after the address,
// including a read of the address being written (old data is returned).
module tb_mem_s;
  import pba_pkg::*;
  localparam int NC = 3;
  localparam int D  = NC * (NC + 1) / 2 * 36;
  logic clk = 0, we = 0;
  logic [$clog2(D)-1:0] waddr = 0, raddr = 0;
  f32_t wdata = 0, rdata;
  f32_t shadow [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  mem_s #(.NCAM(NC)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    f32_t want;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = $bits(waddr)'(a); wdata = $urandom; shadow[a] = wdata;
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      raddr = $bits(raddr)'($urandom_range(D - 1));
      we    = $urandom_range(1);
      waddr = ($urandom_range(3) == 0) ? raddr : $bits(waddr)'($urandom_range(D - 1));
      wdata = $urandom;
      want  = shadow[raddr];
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== want) begin failures++; $display("FAIL addr %0d got %h want %h", raddr, rdata, want); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
