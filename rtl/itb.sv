// itb: input tile buffer. Holds K lines of the input feature map, each
// X_i * C_i activations long, so that a 3x3 window can be read while the
// map is streamed in one pixel at a time.
//
// The K line buffers are addressed through a pointer_array: a write names a
// logical line (K-1 is the lowest, newest line) and a read names a logical
// line too. Shifting the buffer down one feature-map row (sh) only rotates
// the pointers; the line that held the oldest row becomes the lowest line
// and is overwritten by the next row. Each line is split into CI_MIN banks
// (element a lives in bank a mod CI_MIN, word a / CI_MIN) so that one read
// returns CI_MIN consecutive channels of a pixel. Writes take one activation
// per cycle (wr_addr is an element address x*C_i + c), reads return a
// CI_MIN-wide vector one cycle after rd_addr (a vector address). The line
// length of 7168 activations is the published ITB capacity (344.064 Kbit)
// divided by three lines of 16-bit words; banking and read latency are this
// design's choices.
module itb
  import sqj_pkg::*;
#(
  parameter int unsigned K          = 3,
  parameter int unsigned LINE_ELEMS = sqj_pkg::ITB_LINE,
  localparam int unsigned WORDS     = LINE_ELEMS / CI_MIN,
  localparam int unsigned RW        = $clog2(K),
  localparam int unsigned EAW       = $clog2(LINE_ELEMS),
  localparam int unsigned VAW       = $clog2(WORDS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           sh,
  input  logic           we,
  input  logic [RW-1:0]  wr_row,
  input  logic [EAW-1:0] wr_addr,
  input  act_t           wr_data,
  input  logic [RW-1:0]  rd_row,
  input  logic [VAW-1:0] rd_addr,
  output act_vec_t       rd_data
);

  localparam int unsigned BW = $clog2(CI_MIN);

  logic [1:0][RW-1:0] lg, ph;
  assign lg[0] = wr_row;
  assign lg[1] = rd_row;

  pointer_array #(.N(K), .NPORTS(2)) u_ptr (
    .clk(clk), .rst_n(rst_n), .sh(sh), .ad(lg), .do_(ph)
  );

  // one memory per bank; the line index selects a WORDS-long region
  localparam int unsigned MAW = $clog2(K * WORDS);

  logic [BW-1:0]  wbank;
  logic [MAW-1:0] wa, ra;
  assign wbank = wr_addr[BW-1:0];
  assign wa    = MAW'(ph[0]) * MAW'(WORDS) + MAW'(wr_addr >> BW);
  assign ra    = MAW'(ph[1]) * MAW'(WORDS) + MAW'(rd_addr);

  for (genvar b = 0; b < CI_MIN; b++) begin : g_bank
    act_t mem [K * WORDS];
    always_ff @(posedge clk) begin
      if (we && wbank == BW'(b)) mem[wa] <= wr_data;
      rd_data[b] <= mem[ra];
    end
  end

endmodule
