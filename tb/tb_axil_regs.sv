// tb_axil_regs: AXI4-Lite writes and reads of every argument register,
// the start pulse (one cycle, only when idle), and the done/idle status.
module tb_axil_regs;
  import sqj_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [5:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic s_axil_awvalid = 0, s_axil_wvalid = 0, s_axil_bready = 1;
  logic s_axil_arvalid = 0, s_axil_rready = 1;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic s_axil_awready, s_axil_wready, s_axil_bvalid, s_axil_arready, s_axil_rvalid;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic start, busy = 0, done = 0;
  cfg_t cfg;
  int checks = 0, failures = 0, starts = 0;

  axil_regs #(.AW(6)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) starts++;
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axw(int a, int d);
    @(negedge clk);
    s_axil_awaddr = 6'(a); s_axil_wdata = 32'(d); s_axil_awvalid = 1; s_axil_wvalid = 1;
    // bvalid rises after the edge that took the write
    do @(negedge clk); while (!s_axil_bvalid);
    s_axil_awvalid = 0; s_axil_wvalid = 0;
  endtask

  task automatic axr(int a, output int d);
    @(negedge clk);
    s_axil_araddr = 6'(a); s_axil_arvalid = 1;
    do @(negedge clk); while (!s_axil_rvalid);
    s_axil_arvalid = 0;
    d = int'(s_axil_rdata);
  endtask

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    axw('h10, 1); axw('h14, 64); axw('h18, 256); axw('h1C, 15); axw('h20, 13);
    expect_eq(int'(cfg.k3), 0, "k3");
    expect_eq(int'(cfg.ci), 64, "ci");
    expect_eq(int'(cfg.co), 256, "co");
    expect_eq(int'(cfg.xi), 15, "xi");
    expect_eq(int'(cfg.yi), 13, "yi");
    axr('h14, d); expect_eq(d, 64, "rd ci");
    axr('h18, d); expect_eq(d, 256, "rd co");
    axr('h10, d); expect_eq(d, 1, "rd k");
    axw('h10, 3); axr('h10, d); expect_eq(d, 3, "rd k3");
    axr('h00, d); expect_eq(d, 4, "idle");
    axw('h00, 1);
    @(posedge clk); #1;
    expect_eq(starts, 1, "start pulse");
    busy = 1;
    axr('h00, d); expect_eq(d, 1, "busy");
    axw('h00, 1);
    @(posedge clk); #1;
    expect_eq(starts, 1, "no start while busy");
    @(negedge clk); done = 1; busy = 0; @(negedge clk); done = 0;
    axr('h00, d); expect_eq(d, 6, "done+idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
