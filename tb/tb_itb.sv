// tb_itb: writes random activations into the three ITB lines one element at
// a time, shifts the pointer array, and reads CI_MIN-wide vectors back,
// comparing them with a model that keeps the physical lines and the pointer
// rotation separately. Also checks the one-cycle read latency.
module tb_itb;
  import sqj_pkg::*;
  localparam int LE = 256;             // reduced line length
  localparam int WORDS = LE / CI_MIN;
  logic clk = 0, rst_n = 0, sh = 0, we = 0;
  logic [1:0] wr_row = 0, rd_row = 0;
  logic [$clog2(LE)-1:0] wr_addr = 0;
  logic [$clog2(WORDS)-1:0] rd_addr = 0;
  act_t wr_data = 0;
  act_vec_t rd_data;
  int checks = 0, failures = 0, shifts = 0;
  act_t model [3][LE];

  itb #(.K(3), .LINE_ELEMS(LE)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int phys(int lg);
    return (lg + shifts) % 3;
  endfunction

  task automatic wr(int row, int a, act_t d);
    @(negedge clk);
    we = 1; wr_row = 2'(row); wr_addr = $bits(wr_addr)'(a); wr_data = d;
    model[phys(row)][a] = d;
    @(negedge clk);
    we = 0;
  endtask

  task automatic rd_check(int row, int v);
    @(negedge clk);
    rd_row = 2'(row); rd_addr = $bits(rd_addr)'(v);
    @(posedge clk); #1;
    for (int b = 0; b < CI_MIN; b++) begin
      checks++;
      if (rd_data[b] !== model[phys(row)][v * CI_MIN + b]) begin
        failures++;
        if (failures < 10) $display("FAIL row=%0d v=%0d b=%0d got %0d exp %0d", row, v, b,
                                    rd_data[b], model[phys(row)][v * CI_MIN + b]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++)
      for (int a = 0; a < LE; a++) wr(r, a, act_t'($urandom));
    for (int r = 0; r < 3; r++)
      for (int v = 0; v < WORDS; v++) rd_check(r, v);
    for (int s = 0; s < 5; s++) begin
      @(negedge clk); sh = 1; @(negedge clk); sh = 0; shifts++;
      // only the lowest line is rewritten
      for (int a = 0; a < LE; a += 3) wr(2, a, act_t'($urandom));
      for (int r = 0; r < 3; r++)
        for (int v = 0; v < WORDS; v += 2) rd_check(r, v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
