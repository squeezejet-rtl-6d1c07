// tb_sqj_ctrl: runs the controller alone for a 3x3 and a 1x1 layer, with
// a responder that acknowledges the parameter load, a random-valid input
// stream, MAC results returned three cycles after each kernel's last vector
// and a random-ready output stream. Checks the ITB write line and address
// of every input element, and that the counts of input elements, ITB
// shifts, ITWB shifts, MAC issue cycles, ITWB column writes and output
// elements match the layer sizes.
module tb_sqj_ctrl;
  import sqj_pkg::*;
  localparam int NU = 2;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg, cfg_q;
  logic busy, done, par_start, par_done = 0;
  logic fmi_valid = 0, fmi_ready;
  logic itb_sh, itb_we, itwb_sh, itwb_we;
  logic [1:0] itb_wr_row, itb_rd_row, itwb_wr_col, itwb_rd_col;
  logic [12:0] itb_wr_addr;
  logic [8:0] itb_rd_addr;
  logic [6:0] itwb_wr_addr, itwb_rd_addr;
  logic [12:0] wt_rd_addr;
  logic [6:0] b_rd_addr, mac_idx, fo_rd_addr;
  logic mac_valid, mac_first, mac_last, res_valid;
  logic [0:0] fo_sel;
  logic fmo_valid, fmo_ready = 0;
  logic [3:0] lastd = 0;
  int checks = 0, failures = 0;
  int n_in, n_out, n_ish, n_wsh, n_mac, n_wwr, n_done = 0;
  int exp_row, exp_addr, row_elems, in_row_cnt;

  sqj_ctrl #(.NU(NU)) dut (.*);

  assign res_valid = lastd[2];
  always #5 clk = ~clk;
  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    lastd <= {lastd[2:0], mac_valid && mac_last};
    par_done <= par_start;
    if (rst_n && done) n_done++;
    if (rst_n && busy) begin
      if (itb_sh) n_ish++;
      if (itwb_sh) n_wsh++;
      if (mac_valid) n_mac++;
      if (itwb_we) n_wwr++;
      if (fmo_valid && fmo_ready) n_out++;
      if (fmi_valid && fmi_ready) begin
        n_in++;
        checks++;
        if (int'(itb_wr_row) != exp_row || int'(itb_wr_addr) != exp_addr) begin
          failures++;
          if (failures < 10) $display("FAIL in %0d: row %0d addr %0d exp %0d %0d",
                                      n_in, itb_wr_row, itb_wr_addr, exp_row, exp_addr);
        end
        // advance the expected ITB position
        if (cfg_q.k3) begin
          in_row_cnt++;
          exp_addr++;
          if (in_row_cnt == row_elems) begin
            in_row_cnt = 0; exp_addr = 0;
            exp_row = (exp_row == 1) ? 2 : exp_row;
          end
        end else begin
          exp_addr = (exp_addr + 1) % int'(cfg_q.ci);
        end
      end
    end
  end

  task automatic run(bit k3, int ci, int co, int xi, int yi);
    int kk = k3 ? 9 : 1, xo = k3 ? xi - 2 : xi, yo = k3 ? yi - 2 : yi;
    n_in = 0; n_out = 0; n_ish = 0; n_wsh = 0; n_mac = 0; n_wwr = 0;
    exp_row = k3 ? 1 : 2; exp_addr = 0; row_elems = xi * ci; in_row_cnt = 0;
    cfg = '{k3: k3, ci: 10'(ci), co: 9'(co), xi: 10'(xi), yi: 10'(yi)};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) begin
      @(negedge clk);
      fmi_valid = ($urandom_range(0, 3) != 0);
      fmo_ready = ($urandom_range(0, 2) != 0);
    end
    repeat (2) @(posedge clk);
    checks += 6;
    if (n_in != (k3 ? yi * xi * ci : xo * yo * ci)) begin failures++; $display("FAIL n_in %0d", n_in); end
    if (n_out != xo * yo * co) begin failures++; $display("FAIL n_out %0d", n_out); end
    if (n_ish != (k3 ? yo : 0)) begin failures++; $display("FAIL n_ish %0d", n_ish); end
    if (n_wsh != (k3 ? xo * yo : 0)) begin failures++; $display("FAIL n_wsh %0d", n_wsh); end
    if (n_mac != xo * yo * (co / NU) * kk * (ci / 16)) begin failures++; $display("FAIL n_mac %0d", n_mac); end
    if (n_wwr != (k3 ? yo * (xo + 2) * 3 * (ci / 16) : xo * yo * (ci / 16))) begin
      failures++; $display("FAIL n_wwr %0d", n_wwr);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 32, 4, 6, 5);
    run(0, 48, 6, 4, 3);
    run(1, 16, 2, 3, 3);
    checks++;
    if (n_done != 3) begin failures++; $display("FAIL n_done=%0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
