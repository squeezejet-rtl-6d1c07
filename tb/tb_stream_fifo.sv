// tb_stream_fifo: random valid on the write side and random ready on the
// read side; every word read must equal the oldest word written (queue
// model). Checks that the FIFO fills (s_ready low) and empties.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [15:0] s_data = 0, m_data;
  logic [15:0] q[$];
  int checks = 0, failures = 0, n_full = 0, n_in = 0;

  stream_fifo #(.W(16), .DEPTH(8)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready) begin q.push_back(s_data); n_in++; end
    if (s_valid && !s_ready) n_full++;
    if (m_valid && m_ready) begin
      checks++;
      if (q.size() == 0 || m_data !== q.pop_front()) failures++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!s_valid || s_ready) begin
        s_valid = ($urandom_range(0, 3) != 0);
        s_data  = 16'($urandom);
      end
      m_ready = (i < 1500) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
    end
    @(negedge clk); s_valid = 0; m_ready = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (n_full == 0 || q.size() != 0 || m_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
