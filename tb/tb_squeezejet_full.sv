// tb_squeezejet_full: the accelerator with every parameter at its default (eight MAC units,
// full-size buffers) running SqueezeNet v1.1 layer shapes: the fire2
// expand3x3 layer (57x57x16 padded input, 64 outputs), the fire9 expand3x3
// layer (15x15x64 padded input, 256 outputs, which fills the weight buffer)
// and a 256-output slice of conv10 (13x13x512, 1x1), then short stalled and
// saturating layers so that every mechanism is exercised.
//
// For each layer it writes the arguments over AXI-Lite, starts the
// accelerator and, in parallel, streams the weights (order W(c_o,k_h,k_w,
// c_i)) and biases, streams the padded input map (channels fastest, then x,
// then y) and collects the output map. Every output activation is compared
// with an independently computed reference: the convolution sum of the
// equation, plus the bias aligned to the product format, ReLU, a shift by 7
// fraction bits and saturation to 16 bits. The number of MAC issue cycles
// must equal (output pixels) * (C_o/NU) * K*K * (C_i/16), i.e. every unit
// does 16 MACs in every issue cycle. Mechanisms counted (each must occur):
// ITB shifts, ITWB shifts, 3x3 and 1x1 layers, input stalls (valid low),
// input back-pressure (FIFO full), output back-pressure, ReLU clamping
// and output saturation.
module tb_squeezejet_full;
  import sqj_pkg::*;
  localparam int NU = 8;
  logic clk = 0, rst_n = 0;
  logic [5:0]  awaddr = 0, araddr = 0;
  logic        awvalid = 0, wvalid = 0, arvalid = 0;
  logic [31:0] wdata = 0, rdata;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic        par_valid = 0, par_ready, fmi_valid = 0, fmi_ready, fmo_valid, fmo_ready = 0;
  logic [7:0]  par_data = 0;
  logic [15:0] fmi_data = 0, fmo_data;
  logic        busy, done;

  squeezejet  dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(1'b1),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(1'b1),
    .s_par_valid(par_valid), .s_par_ready(par_ready), .s_par_data(par_data),
    .s_fmi_valid(fmi_valid), .s_fmi_ready(fmi_ready), .s_fmi_data(fmi_data),
    .m_fmo_valid(fmo_valid), .m_fmo_ready(fmo_ready), .m_fmo_data(fmo_data),
    .busy, .done
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_itb_sh = 0, n_itwb_sh = 0, n_k3 = 0, n_k1 = 0, n_in_gap = 0, n_in_full = 0;
  int n_out_bp = 0, n_relu = 0, n_sat = 0;
  longint n_mac = 0;
  bit stall_en;
  bit check_mech = 1;
  int outv[];            // output map of the last layer, (y, x, c) order

  int fmi[];
  int w[];
  int b[];
  int L_K, L_CI, L_CO, L_XI, L_YI;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.u_ctrl.itb_sh) n_itb_sh++;
    if (dut.u_ctrl.itwb_sh) n_itwb_sh++;
    if (dut.u_ctrl.mac_valid) n_mac++;
    if (fmi_valid && !fmi_ready) n_in_full++;
    if (fmo_valid && !fmo_ready) n_out_bp++;
  end
  initial begin
    #(200000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axw(int a, int d);
    @(negedge clk);
    awaddr = 6'(a); wdata = 32'(d); awvalid = 1; wvalid = 1;
    do @(negedge clk); while (!bvalid);
    awvalid = 0; wvalid = 0;
  endtask

  task automatic axr(int a, output int d);
    @(negedge clk);
    araddr = 6'(a); arvalid = 1;
    do @(negedge clk); while (!rvalid);
    arvalid = 0;
    d = int'(rdata);
  endtask

  function automatic int ref_out(int y, int x, int co);
    longint s = 0, q;
    for (int kh = 0; kh < L_K; kh++)
      for (int kw = 0; kw < L_K; kw++)
        for (int c = 0; c < L_CI; c++)
          s += longint'(fmi[((y + kh) * L_XI + (x + kw)) * L_CI + c]) *
               longint'(w[((co * L_K + kh) * L_K + kw) * L_CI + c]);
    q = (s + (longint'(b[co]) <<< 3)) >>> 7;
    if (q < 0) begin n_relu++; return 0; end
    if (q > 32767) begin n_sat++; return 32767; end
    return int'(q);
  endfunction

  // amode 0: small non-negative activations, 1: large (saturating), 2: signed,
  // 3: input map already placed in fmi by the caller
  task automatic run_layer(string name, int k, int ci, int co, int xi, int yi, int amode);
    int xo = xi - k + 1, yo = yi - k + 1;
    int nw = co * k * k * ci;
    longint mac0 = n_mac, c0 = cyc;
    int bad = 0, d;
    L_K = k; L_CI = ci; L_CO = co; L_XI = xi; L_YI = yi;
    if (amode != 3) fmi = new[xi * yi * ci];
    outv = new[xo * yo * co];
    w = new[nw];
    b = new[co];
    if (amode != 3) foreach (fmi[i])
      fmi[i] = (amode == 1) ? $urandom_range(16000, 32767) :
               (amode == 2) ? $urandom_range(0, 4095) - 2048 : $urandom_range(0, 255);
    foreach (w[i]) w[i] = (amode == 1) ? $urandom_range(64, 127) : $urandom_range(0, 127) - 64;
    foreach (b[i]) b[i] = $urandom_range(0, 255) - 128;
    if (k == 3) n_k3++; else n_k1++;
    axw('h10, k); axw('h14, ci); axw('h18, co); axw('h1C, xi); axw('h20, yi);
    axw('h00, 1);
    fork
      begin : par_drv
        for (int i = 0; i < nw + co; i++) begin
          @(negedge clk);
          while (stall_en && $urandom_range(0, 7) == 0) @(negedge clk);
          par_valid = 1; par_data = 8'((i < nw) ? w[i] : b[i - nw]);
          do @(posedge clk); while (!par_ready);
          #1 par_valid = 0;
        end
      end
      begin : fmi_drv
        for (int i = 0; i < xi * yi * ci; i++) begin
          @(negedge clk);
          while (stall_en && $urandom_range(0, 7) == 0) begin n_in_gap++; @(negedge clk); end
          fmi_valid = 1; fmi_data = 16'(fmi[i]);
          do @(posedge clk); while (!fmi_ready);
          #1 fmi_valid = 0;
        end
      end
      begin : fmo_chk
        for (int y = 0; y < yo; y++)
          for (int x = 0; x < xo; x++)
            for (int c = 0; c < co; c++) begin
              int e = ref_out(y, x, c);
              int got;
              @(negedge clk);
              fmo_ready = stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
              while (!(fmo_valid && fmo_ready)) begin
                @(negedge clk);
                fmo_ready = stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
              end
              got = int'($signed(fmo_data));
              outv[(y * xo + x) * co + c] = got;
              @(posedge clk); #1;
              fmo_ready = 0;
              checks++;
              if (got != e) begin
                failures++; bad++;
                if (bad < 6) $display("FAIL %s y=%0d x=%0d c=%0d got %0d exp %0d",
                                      name, y, x, c, got, e);
              end
            end
      end
    join
    while (busy) @(negedge clk);
    axr('h00, d);
    checks++;
    if (d != 6) begin failures++; $display("FAIL %s status %0d", name, d); end
    checks++;
    if (n_mac - mac0 != longint'(xo) * yo * (co / NU) * k * k * (ci / 16)) begin
      failures++; $display("FAIL %s MAC issue cycles %0d", name, n_mac - mac0);
    end
    $display("%s: K=%0d Ci=%0d Co=%0d in %0dx%0d: %0d cycles, %0d MAC issue cycles (%0d MACs each)",
             name, k, ci, co, xi, yi, cyc - c0, n_mac - mac0, NU * 16);
  endtask

  task automatic mech(string what, int n);
    checks++;
    $display("mechanism %s: %0d", what, n);
    if (check_mech && n == 0) begin failures++; $display("FAIL mechanism %s never happened", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    stall_en = 0;
    run_layer("fire2_expand3x3", 3, 16, 64, 57, 57, 0);
    run_layer("fire9_expand3x3", 3, 64, 256, 15, 15, 0);
    run_layer("conv10_slice", 1, 512, 256, 13, 13, 0);
    stall_en = 1;
    run_layer("stalled_k3", 3, 32, 16, 5, 4, 2);
    run_layer("saturating_k3", 3, 16, 8, 4, 4, 1);
    mech("ITB shift", n_itb_sh);
    mech("ITWB shift", n_itwb_sh);
    mech("3x3 layer", n_k3);
    mech("1x1 layer", n_k1);
    mech("input valid gap", n_in_gap);
    mech("input FIFO full", n_in_full);
    mech("output back-pressure", n_out_bp);
    mech("ReLU clamp", n_relu);
    mech("saturation", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
