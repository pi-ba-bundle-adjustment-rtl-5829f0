// tb_stream_fifo: pushes a numbered sequence through the FIFO with random
// valid and ready and checks that every word comes out once, in order; also
// checks that s_ready drops exactly when DEPTH words are held.
module tb_stream_fifo;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [15:0] s_data = 0, m_data;
  int checks = 0, failures = 0, held = 0, nin = 0, nout = 0, full_seen = 0;

  always #5 clk = ~clk;
  stream_fifo #(.WIDTH(16), .DEPTH(D)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (nout < 3000) begin
      @(negedge clk);
      s_valid = (nin < 3000) && ($urandom_range(3) != 0);
      s_data  = 16'(nin);
      m_ready = (nout < 1500) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      #1;
      checks++;
      if (s_ready != (held < D)) begin failures++; $display("FAIL s_ready held=%0d", held); end
      if (held == D) full_seen++;
      if (m_valid && m_ready) begin
        checks++;
        if (m_data != 16'(nout)) begin failures++; $display("FAIL order %0d %0d", m_data, nout); end
        nout++;
        held--;
      end
      if (s_valid && s_ready) begin nin++; held++; end
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
