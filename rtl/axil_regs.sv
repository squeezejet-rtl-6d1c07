// axil_regs: AXI4-Lite slave holding the layer arguments of the
// accelerator and its start/done control.
//
// Register map (32-bit, byte addresses):
//   0x00 CTRL  write bit0 = 1: start a layer (ignored while busy)
//              read  bit0 = busy, bit1 = done (set when a layer ends,
//              cleared by the next start), bit2 = idle
//   0x10 K     bit0: 1 = 3x3 kernel, 0 = 1x1 kernel (written as 1 or 3)
//   0x14 CI    input channels      0x18 CO  output channels
//   0x1C XI    input width (incl. padding)  0x20 YI input height
// A write is taken when AWVALID and WVALID are both high and no response is
// pending; the response (OKAY) follows one cycle later. A read is taken when
// ARVALID is high and no read data is pending; RDATA follows one cycle later.
// start is a one-cycle pulse. The use of AXI-Lite for the layer arguments
// follows the published design; the register map is this design's choice.
module axil_regs
  import sqj_pkg::*;
#(
  parameter int unsigned AW = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] s_axil_awaddr,
  input  logic          s_axil_awvalid,
  output logic          s_axil_awready,
  input  logic [31:0]   s_axil_wdata,
  input  logic          s_axil_wvalid,
  output logic          s_axil_wready,
  output logic [1:0]    s_axil_bresp,
  output logic          s_axil_bvalid,
  input  logic          s_axil_bready,
  input  logic [AW-1:0] s_axil_araddr,
  input  logic          s_axil_arvalid,
  output logic          s_axil_arready,
  output logic [31:0]   s_axil_rdata,
  output logic [1:0]    s_axil_rresp,
  output logic          s_axil_rvalid,
  input  logic          s_axil_rready,
  output logic          start,
  output cfg_t          cfg,
  input  logic          busy,
  input  logic          done
);

  logic done_flag;
  logic wr_take, rd_take;

  assign wr_take        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_take;
  assign s_axil_wready  = wr_take;
  assign s_axil_bresp   = 2'b00;
  assign rd_take        = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_take;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      start         <= 1'b0;
      done_flag     <= 1'b0;
      cfg           <= '{k3: 1'b1, ci: 10'd16, co: 9'd16, xi: 10'd3, yi: 10'd3};
    end else begin
      start <= 1'b0;
      if (done) done_flag <= 1'b1;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (wr_take) begin
        s_axil_bvalid <= 1'b1;
        case (s_axil_awaddr)
          AW'('h00): if (s_axil_wdata[0] && !busy) begin
                       start     <= 1'b1;
                       done_flag <= 1'b0;
                     end
          AW'('h10): cfg.k3 <= (s_axil_wdata[3:0] == 4'd3);
          AW'('h14): cfg.ci <= s_axil_wdata[9:0];
          AW'('h18): cfg.co <= s_axil_wdata[8:0];
          AW'('h1C): cfg.xi <= s_axil_wdata[9:0];
          AW'('h20): cfg.yi <= s_axil_wdata[9:0];
          default: ;
        endcase
      end
      if (rd_take) begin
        s_axil_rvalid <= 1'b1;
        case (s_axil_araddr)
          AW'('h00): s_axil_rdata <= {29'd0, !busy, done_flag, busy};
          AW'('h10): s_axil_rdata <= cfg.k3 ? 32'd3 : 32'd1;
          AW'('h14): s_axil_rdata <= 32'(cfg.ci);
          AW'('h18): s_axil_rdata <= 32'(cfg.co);
          AW'('h1C): s_axil_rdata <= 32'(cfg.xi);
          AW'('h20): s_axil_rdata <= 32'(cfg.yi);
          default:   s_axil_rdata <= '0;
        endcase
      end
    end
  end

  // AXI: a response, once raised, stays until it is accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
