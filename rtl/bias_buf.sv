// bias_buf: the bias values B(c_o) of the output channels assigned to one
// MAC unit, indexed by the unit's kernel slot j. One write and one
// registered read (one cycle latency) per cycle. The default depth is the
// published 2048-bit bias store divided over eight MAC units.
module bias_buf
  import sqj_pkg::*;
#(
  parameter int unsigned DEPTH = sqj_pkg::CO_MAX / 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  wt_t           wr_data,
  input  logic [AW-1:0] rd_addr,
  output wt_t           rd_data
);

  wt_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
