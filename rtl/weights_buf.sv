// weights_buf: the weights of the 3D kernels assigned to one MAC unit.
//
// Filled one 8-bit weight per cycle from the parameter stream (wr_addr is
// an element address), read as a CI_MIN-wide vector of weights per cycle
// (rd_addr is a vector address) with a one-cycle read latency. Element a is
// stored in bank a mod CI_MIN, word a / CI_MIN, which lets CI_MIN weights
// be read at once. The default depth is the published 1.179648 Mbit weight
// store divided over eight MAC units (18432 weights each); banking and
// latency are this design's choices.
module weights_buf
  import sqj_pkg::*;
#(
  parameter int unsigned DEPTH_ELEMS = sqj_pkg::WT_TOTAL / 8,
  localparam int unsigned WORDS      = DEPTH_ELEMS / CI_MIN,
  localparam int unsigned EAW        = $clog2(DEPTH_ELEMS),
  localparam int unsigned VAW        = $clog2(WORDS)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [EAW-1:0] wr_addr,
  input  wt_t            wr_data,
  input  logic [VAW-1:0] rd_addr,
  output wt_vec_t        rd_data
);

  localparam int unsigned BW = $clog2(CI_MIN);

  for (genvar b = 0; b < CI_MIN; b++) begin : g_bank
    wt_t mem [WORDS];
    always_ff @(posedge clk) begin
      if (we && wr_addr[BW-1:0] == BW'(b)) mem[VAW'(wr_addr >> BW)] <= wr_data;
      rd_data[b] <= mem[rd_addr];
    end
  end

endmodule
