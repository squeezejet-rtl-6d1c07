// squeezejet: convolution-layer accelerator for SqueezeNet v1.1 layers with
// stride 1, 1x1 or 3x3 kernels, input channels a multiple of 16 and fused
// ReLU.
//
// A layer is described over AXI-Lite (K, C_i, C_o, X_i, Y_i; see
// axil_regs) and started by writing 1 to the control register. The
// accelerator then takes all weights and biases of the layer from the 8-bit
// parameter stream, the padded input feature map pixel by pixel (C_i
// activations per pixel, channels fastest, then x, then y) from the 16-bit
// input stream, and returns the output feature map pixel by pixel (C_o
// activations per pixel) on the 16-bit output stream. Each stream passes
// through a stream_fifo; all three use a valid/ready handshake.
//
// Inside, one input tile buffer (itb) holds three input rows and feeds NU
// identical slices. A slice has its own window buffer (itwb), weights_buf,
// bias_buf, pipelined MAC-16 unit (mac16) and fmap_o_buf, and computes the
// output channels c_o with c_o mod NU equal to its index, so NU output
// channels are computed at the same time, each at 16 MACs per cycle.
// sqj_ctrl sequences everything. The block structure, the buffer sizes and
// the parallelism follow the published design (eight MAC-16 units in the
// evaluated configuration); the control details are this design's.
module squeezejet
  import sqj_pkg::*;
#(
  parameter int unsigned NU         = 8,
  parameter int unsigned LINE_ELEMS = sqj_pkg::ITB_LINE,
  parameter int unsigned CI_MAXP    = sqj_pkg::CI_MAX,
  parameter int unsigned WT_ELEMS   = sqj_pkg::WT_TOTAL / NU,
  parameter int unsigned SLOTS      = sqj_pkg::CO_MAX / NU,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Lite layer arguments
  input  logic [5:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [5:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // parameter stream (weights, then biases)
  input  logic        s_par_valid,
  output logic        s_par_ready,
  input  logic [7:0]  s_par_data,
  // input feature map stream
  input  logic        s_fmi_valid,
  output logic        s_fmi_ready,
  input  logic [15:0] s_fmi_data,
  // output feature map stream
  output logic        m_fmo_valid,
  input  logic        m_fmo_ready,
  output logic [15:0] m_fmo_data,
  // status
  output logic        busy,
  output logic        done
);

  localparam int unsigned UW   = (NU > 1) ? $clog2(NU) : 1;
  localparam int unsigned IEAW = $clog2(LINE_ELEMS);
  localparam int unsigned IVAW = $clog2(LINE_ELEMS / CI_MIN);
  localparam int unsigned WAW  = $clog2(3 * CI_MAXP / CI_MIN);
  localparam int unsigned WEAW = $clog2(WT_ELEMS);
  localparam int unsigned WVAW = $clog2(WT_ELEMS / CI_MIN);
  localparam int unsigned JW   = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  cfg_t cfg, cfg_q;
  logic start;

  axil_regs #(.AW(6)) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .start, .cfg, .busy, .done
  );

  // ---------------- stream FIFOs ----------------
  logic       par_v, par_r;
  logic [7:0] par_d;
  logic       fmi_v, fmi_r;
  logic [15:0] fmi_d;
  logic       fmo_v, fmo_r;
  act_t       fmo_d;

  stream_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_par_fifo (
    .clk, .rst_n, .s_valid(s_par_valid), .s_ready(s_par_ready), .s_data(s_par_data),
    .m_valid(par_v), .m_ready(par_r), .m_data(par_d)
  );
  stream_fifo #(.W(16), .DEPTH(FIFO_DEPTH)) u_fmi_fifo (
    .clk, .rst_n, .s_valid(s_fmi_valid), .s_ready(s_fmi_ready), .s_data(s_fmi_data),
    .m_valid(fmi_v), .m_ready(fmi_r), .m_data(fmi_d)
  );
  stream_fifo #(.W(16), .DEPTH(FIFO_DEPTH)) u_fmo_fifo (
    .clk, .rst_n, .s_valid(fmo_v), .s_ready(fmo_r), .s_data(fmo_d),
    .m_valid(m_fmo_valid), .m_ready(m_fmo_ready), .m_data(m_fmo_data)
  );

  // ---------------- parameter loader ----------------
  logic            par_start, par_done;
  logic            wt_we, b_we;
  logic [UW-1:0]   wt_unit, b_unit;
  logic [WEAW-1:0] wt_waddr;
  logic [JW-1:0]   b_waddr;
  wt_t             wt_wdata, b_wdata;

  param_loader #(.NU(NU), .WT_ELEMS(WT_ELEMS), .SLOTS(SLOTS)) u_loader (
    .clk, .rst_n, .start(par_start), .cfg(cfg_q),
    .s_valid(par_v), .s_ready(par_r), .s_data(wt_t'(par_d)),
    .wt_we, .wt_unit, .wt_addr(wt_waddr), .wt_data(wt_wdata),
    .b_we, .b_unit, .b_addr(b_waddr), .b_data(b_wdata),
    .done(par_done)
  );

  // ---------------- controller ----------------
  logic            itb_sh, itb_we;
  logic [1:0]      itb_wr_row, itb_rd_row;
  logic [IEAW-1:0] itb_wr_addr;
  logic [IVAW-1:0] itb_rd_addr;
  logic            itwb_sh, itwb_we;
  logic [1:0]      itwb_wr_col, itwb_rd_col;
  logic [WAW-1:0]  itwb_wr_addr, itwb_rd_addr;
  logic [WVAW-1:0] wt_raddr;
  logic [JW-1:0]   b_raddr;
  logic            mac_valid, mac_first, mac_last;
  logic [JW-1:0]   mac_idx;
  logic [JW-1:0]   fo_raddr;
  logic [UW-1:0]   fo_sel;
  logic [NU-1:0]   res_valid;

  sqj_ctrl #(.NU(NU), .LINE_ELEMS(LINE_ELEMS), .CI_MAXP(CI_MAXP),
             .WT_ELEMS(WT_ELEMS), .SLOTS(SLOTS)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_q, .busy, .done,
    .par_start, .par_done,
    .fmi_valid(fmi_v), .fmi_ready(fmi_r),
    .itb_sh, .itb_we, .itb_wr_row, .itb_wr_addr, .itb_rd_row, .itb_rd_addr,
    .itwb_sh, .itwb_we, .itwb_wr_col, .itwb_wr_addr, .itwb_rd_col, .itwb_rd_addr,
    .wt_rd_addr(wt_raddr), .b_rd_addr(b_raddr),
    .mac_valid, .mac_first, .mac_last, .mac_idx,
    .res_valid(res_valid[0]),
    .fo_rd_addr(fo_raddr), .fo_sel,
    .fmo_valid(fmo_v), .fmo_ready(fmo_r)
  );

  // ---------------- input tile buffer ----------------
  act_vec_t itb_q;

  itb #(.K(3), .LINE_ELEMS(LINE_ELEMS)) u_itb (
    .clk, .rst_n, .sh(itb_sh), .we(itb_we),
    .wr_row(itb_wr_row), .wr_addr(itb_wr_addr), .wr_data(act_t'(fmi_d)),
    .rd_row(itb_rd_row), .rd_addr(itb_rd_addr), .rd_data(itb_q)
  );

  // ---------------- NU MAC slices ----------------
  act_t fo_q [NU];

  for (genvar u = 0; u < NU; u++) begin : g_unit
    act_vec_t win_q;
    wt_vec_t  wt_q;
    wt_t      b_q;
    logic [JW-1:0] r_idx;
    act_t     r_data;

    itwb #(.K(3), .CI_MAXP(CI_MAXP)) u_itwb (
      .clk, .rst_n, .sh(itwb_sh), .we(itwb_we),
      .wr_col(itwb_wr_col), .wr_addr(itwb_wr_addr), .wr_data(itb_q),
      .rd_col(itwb_rd_col), .rd_addr(itwb_rd_addr), .rd_data(win_q)
    );

    weights_buf #(.DEPTH_ELEMS(WT_ELEMS)) u_wts (
      .clk, .we(wt_we && wt_unit == UW'(u)), .wr_addr(wt_waddr), .wr_data(wt_wdata),
      .rd_addr(wt_raddr), .rd_data(wt_q)
    );

    bias_buf #(.DEPTH(SLOTS)) u_bias (
      .clk, .we(b_we && b_unit == UW'(u)), .wr_addr(b_waddr), .wr_data(b_wdata),
      .rd_addr(b_raddr), .rd_data(b_q)
    );

    mac16 #(.IDX_W(JW)) u_mac (
      .clk, .rst_n,
      .in_valid(mac_valid), .in_first(mac_first), .in_last(mac_last), .in_idx(mac_idx),
      .act(win_q), .wt(wt_q), .bias(b_q),
      .out_valid(res_valid[u]), .out_idx(r_idx), .out_data(r_data)
    );

    fmap_o_buf #(.DEPTH(SLOTS)) u_fo (
      .clk, .we(res_valid[u]), .wr_addr(r_idx), .wr_data(r_data),
      .rd_addr(fo_raddr), .rd_data(fo_q[u])
    );
  end

  assign fmo_d = fo_q[fo_sel];

  // the output FIFO is never written while full: the controller holds data
  assert property (@(posedge clk) disable iff (!rst_n) fmo_v && !fmo_r |=> fmo_v);

endmodule
