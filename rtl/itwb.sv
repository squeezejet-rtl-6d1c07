// itwb: input tile window buffer of one MAC unit. Holds the K x K x C_i
// input window (IW) of the output pixel being computed.
//
// The window is stored as K column buffers, one per kernel column kw, each
// holding K rows x C_i channels as CI_MIN-wide vectors (address
// kh * C_i/CI_MIN + g). A column pointer_array selects the physical column
// for a logical column, so when the window moves one pixel to the right
// (sh) only the column that falls out is rewritten with the new one; the
// same pointer mechanism as the input tile buffer. Writes and reads are one
// vector each; reads return data one cycle after rd_addr. The capacity
// (3 x 3 x 512 activations = 73.728 Kbit) is the published ITWB size; the
// column organisation follows the published shift mechanism, and the read
// latency is this design's choice.
module itwb
  import sqj_pkg::*;
#(
  parameter int unsigned K       = 3,
  parameter int unsigned CI_MAXP = sqj_pkg::CI_MAX,
  localparam int unsigned DEPTH  = K * CI_MAXP / CI_MIN,
  localparam int unsigned CW     = $clog2(K),
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sh,
  input  logic          we,
  input  logic [CW-1:0] wr_col,
  input  logic [AW-1:0] wr_addr,
  input  act_vec_t      wr_data,
  input  logic [CW-1:0] rd_col,
  input  logic [AW-1:0] rd_addr,
  output act_vec_t      rd_data
);

  logic [1:0][CW-1:0] lg, ph;
  assign lg[0] = wr_col;
  assign lg[1] = rd_col;

  pointer_array #(.N(K), .NPORTS(2)) u_ptr (
    .clk(clk), .rst_n(rst_n), .sh(sh), .ad(lg), .do_(ph)
  );

  // one memory; the physical column selects a DEPTH-long region
  localparam int unsigned MAW = $clog2(K * DEPTH);

  act_vec_t mem [K * DEPTH];
  logic [MAW-1:0] wa, ra;
  assign wa = MAW'(ph[0]) * MAW'(DEPTH) + MAW'(wr_addr);
  assign ra = MAW'(ph[1]) * MAW'(DEPTH) + MAW'(rd_addr);

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wr_data;
    rd_data <= mem[ra];
  end

endmodule
