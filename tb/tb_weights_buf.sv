// tb_weights_buf: writes random weights one element at a time and reads
// them back as CI_MIN-wide vectors (element a = bank a mod CI_MIN of
// vector a / CI_MIN), checking the one-cycle read latency.
module tb_weights_buf;
  import sqj_pkg::*;
  localparam int DE = 1024;
  localparam int WORDS = DE / CI_MIN;
  logic clk = 0, we = 0;
  logic [$clog2(DE)-1:0] wr_addr = 0;
  logic [$clog2(WORDS)-1:0] rd_addr = 0;
  wt_t wr_data = 0;
  wt_vec_t rd_data;
  wt_t model [DE];
  int checks = 0, failures = 0;

  weights_buf #(.DEPTH_ELEMS(DE)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DE; a++) begin
      @(negedge clk);
      we = 1; wr_addr = $bits(wr_addr)'(a); wr_data = wt_t'($urandom); model[a] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 200; i++) begin
      automatic int v = $urandom_range(0, WORDS - 1);
      @(negedge clk); rd_addr = $bits(rd_addr)'(v);
      @(posedge clk); #1;
      for (int b = 0; b < CI_MIN; b++) begin
        checks++;
        if (rd_data[b] !== model[v * CI_MIN + b]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
