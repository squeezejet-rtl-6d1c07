// fmap_o_buf: one MAC unit's output channels of the output pixel being
// computed. The units finish their channels in parallel; this buffer keeps
// them until the controller streams the whole pixel out in channel order.
// One write and one registered read (one cycle latency) per cycle. The
// default depth is the published 4096-bit output-pixel store divided over
// eight MAC units.
module fmap_o_buf
  import sqj_pkg::*;
#(
  parameter int unsigned DEPTH = sqj_pkg::CO_MAX / 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  act_t          wr_data,
  input  logic [AW-1:0] rd_addr,
  output act_t          rd_data
);

  act_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
