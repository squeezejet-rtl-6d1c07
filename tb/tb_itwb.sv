// tb_itwb: fills the three window columns with random vectors, shifts the
// column pointer array, rewrites only logical column 2, and checks every
// read against a model of physical columns plus pointer rotation.
module tb_itwb;
  import sqj_pkg::*;
  localparam int CIM = 64;
  localparam int DEPTH = 3 * CIM / CI_MIN;
  logic clk = 0, rst_n = 0, sh = 0, we = 0;
  logic [1:0] wr_col = 0, rd_col = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = 0, rd_addr = 0;
  act_vec_t wr_data = '0, rd_data;
  int checks = 0, failures = 0, shifts = 0;
  act_vec_t model [3][DEPTH];

  itwb #(.K(3), .CI_MAXP(CIM)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic act_vec_t rnd();
    act_vec_t v;
    for (int b = 0; b < CI_MIN; b++) v[b] = act_t'($urandom);
    return v;
  endfunction

  task automatic wr(int c, int a);
    act_vec_t d = rnd();
    @(negedge clk);
    we = 1; wr_col = 2'(c); wr_addr = $bits(wr_addr)'(a); wr_data = d;
    model[(c + shifts) % 3][a] = d;
    @(negedge clk);
    we = 0;
  endtask

  task automatic rd_check(int c, int a);
    @(negedge clk);
    rd_col = 2'(c); rd_addr = $bits(rd_addr)'(a);
    @(posedge clk); #1;
    checks++;
    if (rd_data !== model[(c + shifts) % 3][a]) begin
      failures++;
      if (failures < 10) $display("FAIL col=%0d a=%0d shifts=%0d", c, a, shifts);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3; c++) for (int a = 0; a < DEPTH; a++) wr(c, a);
    for (int c = 0; c < 3; c++) for (int a = 0; a < DEPTH; a++) rd_check(c, a);
    for (int s = 0; s < 7; s++) begin
      @(negedge clk); sh = 1; @(negedge clk); sh = 0; shifts++;
      for (int a = 0; a < DEPTH; a++) wr(2, a);
      for (int c = 0; c < 3; c++) for (int a = 0; a < DEPTH; a++) rd_check(c, a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
