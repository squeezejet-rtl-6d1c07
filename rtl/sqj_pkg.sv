// sqj_pkg: numeric formats, sizes and shared types of the SqueezeJet
// convolution-layer accelerator.
//
// Activations are 16-bit two's complement with 3 fraction bits (Q13.3);
// weights and biases are 8-bit two's complement with 7 fraction bits (Q1.7).
// These formats, the 16-wide input-channel parallelism (CI_MIN) and the
// buffer capacities follow the published design. The buffer capacities are
// expressed in elements and were obtained by dividing the published bit
// counts by the element width. The accumulator width and the rounding rule
// of the output requantisation (truncate, then saturate) are this design's
// own choices.
package sqj_pkg;

  localparam int unsigned ACT_W   = 16;   // activation width, Q13.3
  localparam int unsigned ACT_FRAC = 3;
  localparam int unsigned WT_W    = 8;    // weight / bias width, Q1.7
  localparam int unsigned WT_FRAC = 7;
  localparam int unsigned CI_MIN  = 16;   // activations per MAC cycle
  localparam int unsigned ACC_W   = 40;   // accumulator width

  // Layer limits (totals over all MAC units).
  localparam int unsigned CI_MAX       = 512;     // ITWB: 3*3*512*16 b = 73.728 Kb
  localparam int unsigned CO_MAX       = 256;     // bias 2048 b, fmap_o 4096 b
  localparam int unsigned WT_TOTAL     = 147456;  // weights 1.179648 Mb / 8 b
  localparam int unsigned ITB_LINE     = 7168;    // ITB 344.064 Kb / 3 / 16 b

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WT_W-1:0]  wt_t;
  typedef act_t [CI_MIN-1:0]       act_vec_t;
  typedef wt_t  [CI_MIN-1:0]       wt_vec_t;

  // Layer arguments written over AXI-Lite. X_i and Y_i include padding.
  typedef struct packed {
    logic        k3;    // 1: 3x3 kernel, 0: 1x1 kernel
    logic [9:0]  ci;    // input channels, multiple of CI_MIN, <= CI_MAX
    logic [8:0]  co;    // output channels, multiple of the unit count, <= CO_MAX
    logic [9:0]  xi;    // input width
    logic [9:0]  yi;    // input height
  } cfg_t;

  // Bias add, ReLU and requantisation of a finished accumulator.
  // acc has ACT_FRAC+WT_FRAC = 10 fraction bits; the Q1.7 bias is aligned
  // by a left shift of ACT_FRAC. Result: max(0, x) >> WT_FRAC, saturated.
  function automatic act_t finish_acc(input logic signed [ACC_W-1:0] acc,
                                      input wt_t bias);
    logic signed [ACC_W-1:0] s;
    logic signed [ACC_W-1:0] q;
    s = acc + (ACC_W'(bias) <<< ACT_FRAC);
    q = s >>> WT_FRAC;
    if (q < 0)                      return '0;
    else if (q > ACC_W'(32767))     return act_t'(32767);
    else                            return act_t'(q[ACT_W-1:0]);
  endfunction

endpackage
