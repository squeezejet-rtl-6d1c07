// tb_param_loader: streams the weights and biases of a 3x3 and of a 1x1
// layer, with random gaps, into param_loader and records every write into a
// model of the NU weight and bias buffers. Each stored value must sit at
// unit c_o mod NU, slot c_o / NU, element offset (k_h*K+k_w)*C_i+c_i.
module tb_param_loader;
  import sqj_pkg::*;
  localparam int NU = 4;
  localparam int WE = 2048, SL = 16;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic s_valid = 0, s_ready;
  wt_t s_data = 0;
  logic wt_we, b_we, done;
  logic [1:0] wt_unit, b_unit;
  logic [$clog2(WE)-1:0] wt_addr;
  logic [3:0] b_addr;
  wt_t wt_data, b_data;
  wt_t mw [NU][WE];
  wt_t mb [NU][SL];
  int checks = 0, failures = 0, n_done = 0;

  param_loader #(.NU(NU), .WT_ELEMS(WE), .SLOTS(SL)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (wt_we) mw[wt_unit][wt_addr] <= wt_data;
    if (b_we) mb[b_unit][b_addr] <= b_data;
    if (rst_n && done) n_done++;
  end

  task automatic run(bit k3, int ci, int co);
    int kk = k3 ? 9 : 1;
    wt_t w[] = new[co * kk * ci];
    wt_t b[] = new[co];
    foreach (w[i]) w[i] = wt_t'($urandom);
    foreach (b[i]) b[i] = wt_t'($urandom);
    cfg = '{k3: k3, ci: 10'(ci), co: 9'(co), xi: 10'd5, yi: 10'd5};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < co * kk * ci + co; i++) begin
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      s_valid = 1; s_data = (i < co * kk * ci) ? w[i] : b[i - co * kk * ci];
      do @(posedge clk); while (!s_ready);
      @(negedge clk); s_valid = 0;
    end
    repeat (3) @(negedge clk);
    for (int c = 0; c < co; c++) begin
      for (int e = 0; e < kk * ci; e++) begin
        checks++;
        if (mw[c % NU][(c / NU) * kk * ci + e] !== w[c * kk * ci + e]) begin
          failures++; if (failures < 5) $display("FAIL w c=%0d e=%0d", c, e);
        end
      end
      checks++;
      if (mb[c % NU][c / NU] !== b[c]) begin failures++; $display("FAIL b c=%0d", c); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 32, 8);
    run(0, 64, 16);
    checks++;
    if (n_done != 2) begin failures++; $display("FAIL n_done=%0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
