// mac16: pipelined MAC-CI_MIN unit (MAC-16 with the default CI_MIN = 16).
//
// Every cycle it accepts one vector of CI_MIN activations (Q13.3) and one
// vector of CI_MIN weights (Q1.7), multiplies them element-wise and sums the
// products, so CI_MIN multiply-accumulates are done per cycle. The sums of
// consecutive vectors are accumulated from the vector marked in_first to the
// vector marked in_last, which together make up one 3D kernel
// (K*K*C_i/CI_MIN vectors). On in_last the bias (Q1.7, sampled with
// in_last) is added, ReLU is applied and the result is requantised to the
// Q13.3 activation format (truncating shift, saturation at 32767).
//
// Pipeline: stage 1 registers the products, stage 2 the adder-tree sum,
// stage 3 the accumulator and, on the last vector, the finished output.
// out_valid therefore rises three cycles after the in_last input, and a new
// kernel can start in the cycle after the previous in_last. The unit
// structure (CI_MIN multipliers feeding an accumulator, pipelined) and the
// number formats follow the published design; the stage split, the 40-bit
// accumulator and the rounding are this design's choices.
module mac16
  import sqj_pkg::*;
#(
  parameter int unsigned IDX_W = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [IDX_W-1:0] in_idx,
  input  act_vec_t         act,
  input  wt_vec_t          wt,
  input  wt_t              bias,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output act_t             out_data
);

  localparam int unsigned PW = ACT_W + WT_W;             // product width
  localparam int unsigned SW = PW + $clog2(CI_MIN);      // sum width

  typedef struct packed {
    logic             valid;
    logic             first;
    logic             last;
    logic [IDX_W-1:0] idx;
    wt_t              bias;
  } tag_t;

  tag_t tag1, tag2;
  logic signed [PW-1:0] prod [CI_MIN];
  logic signed [SW-1:0] sum2;
  logic signed [ACC_W-1:0] acc, acc_next;

  // stage 1: products
  always_ff @(posedge clk) begin
    for (int b = 0; b < CI_MIN; b++) prod[b] <= PW'($signed(act[b])) * PW'($signed(wt[b]));
  end

  // stage 2: adder tree
  always_ff @(posedge clk) begin
    logic signed [SW-1:0] s;
    s = '0;
    for (int b = 0; b < CI_MIN; b++) s += SW'(prod[b]);
    sum2 <= s;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tag1 <= '0;
      tag2 <= '0;
    end else begin
      tag1 <= '{valid: in_valid, first: in_first, last: in_last, idx: in_idx, bias: bias};
      tag2 <= tag1;
    end
  end

  // stage 3: accumulate, finish on the last vector of a kernel
  assign acc_next = (tag2.first ? ACC_W'(0) : acc) + ACC_W'(sum2);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      acc       <= '0;
      out_idx   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= tag2.valid && tag2.last;
      if (tag2.valid) begin
        acc <= acc_next;
        if (tag2.last) begin
          out_idx  <= tag2.idx;
          out_data <= finish_acc(acc_next, tag2.bias);
        end
      end
    end
  end

endmodule
