// tb_bias_buf: writes random values to every entry of bias_buf, reads them back
// in random order and checks each value and the one-cycle read latency
// (the address is changed in the same cycle the previous data is checked).
module tb_bias_buf;
  import sqj_pkg::*;
  localparam int D = 32;
  logic clk = 0, we = 0;
  logic [4:0] wr_addr = 0, rd_addr = 0;
  wt_t wr_data = 0, rd_data;
  wt_t model [D];
  int checks = 0, failures = 0;

  bias_buf #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; wr_addr = 5'(a); wr_data = wt_t'($urandom); model[a] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 100; i++) begin
      automatic int a = $urandom_range(0, D - 1);
      @(negedge clk); rd_addr = 5'(a);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
