// param_loader: distributes the 8-bit parameter stream over the weight and
// bias buffers of the NU MAC units.
//
// After start it accepts C_o * K*K*C_i weights in the order W(c_o, k_h,
// k_w, c_i) (c_i fastest, as in the convolution equation), then C_o biases
// in c_o order, one value per accepted stream word (s_valid && s_ready).
// Output channel c_o belongs to unit c_o mod NU and is that unit's kernel
// slot j = c_o / NU; inside a unit, kernel j occupies element addresses
// j*K*K*C_i .. (j+1)*K*K*C_i - 1. Each accepted word produces one write in
// the same cycle; done pulses in the cycle after the last bias is taken.
// Splitting the weights into equal groups of 3D kernels, one group per MAC
// unit, follows the published design; the stream order (weights before
// biases) and the interleaved channel-to-unit assignment are this design's
// choices.
module param_loader
  import sqj_pkg::*;
#(
  parameter int unsigned NU          = 8,
  parameter int unsigned WT_ELEMS    = sqj_pkg::WT_TOTAL / NU,
  parameter int unsigned SLOTS       = sqj_pkg::CO_MAX / NU,
  localparam int unsigned UW         = (NU > 1) ? $clog2(NU) : 1,
  localparam int unsigned EAW        = $clog2(WT_ELEMS),
  localparam int unsigned JW         = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cfg_t           cfg,
  input  logic           s_valid,
  output logic           s_ready,
  input  wt_t            s_data,
  output logic           wt_we,
  output logic [UW-1:0]  wt_unit,
  output logic [EAW-1:0] wt_addr,
  output wt_t            wt_data,
  output logic           b_we,
  output logic [UW-1:0]  b_unit,
  output logic [JW-1:0]  b_addr,
  output wt_t            b_data,
  output logic           done
);

  typedef enum logic [1:0] {P_IDLE, P_WT, P_BIAS} pstate_t;
  pstate_t st;

  logic [15:0] kkci;       // weights per 3D kernel
  logic [15:0] e;          // element inside the current kernel
  logic [15:0] base;       // j * kkci
  logic [UW-1:0] u;        // unit of the current output channel
  logic [8:0]  j;          // kernel slot
  logic [8:0]  nj;         // slots per unit

  logic fire;
  assign s_ready = (st != P_IDLE);
  assign fire    = s_valid && s_ready;

  assign wt_we   = fire && (st == P_WT);
  assign wt_unit = u;
  assign wt_addr = EAW'(base + e);
  assign wt_data = s_data;
  assign b_we    = fire && (st == P_BIAS);
  assign b_unit  = u;
  assign b_addr  = JW'(j);
  assign b_data  = s_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= P_IDLE;
      done <= 1'b0;
      kkci <= '0;
      e    <= '0;
      base <= '0;
      u    <= '0;
      j    <= '0;
      nj   <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        P_IDLE: if (start) begin
          st   <= P_WT;
          kkci <= cfg.k3 ? 16'(cfg.ci) * 16'd9 : 16'(cfg.ci);
          nj   <= 9'(cfg.co / NU);
          e    <= '0;
          base <= '0;
          u    <= '0;
          j    <= '0;
        end
        P_WT: if (fire) begin
          if (e == kkci - 1'b1) begin
            e <= '0;
            if (u == UW'(NU-1)) begin
              u <= '0;
              if (j == nj - 1'b1) begin
                j    <= '0;
                base <= '0;
                st   <= P_BIAS;
              end else begin
                j    <= j + 1'b1;
                base <= base + kkci;
              end
            end else begin
              u <= u + 1'b1;
            end
          end else begin
            e <= e + 1'b1;
          end
        end
        P_BIAS: if (fire) begin
          if (u == UW'(NU-1)) begin
            u <= '0;
            if (j == nj - 1'b1) begin
              st   <= P_IDLE;
              done <= 1'b1;
            end else begin
              j <= j + 1'b1;
            end
          end else begin
            u <= u + 1'b1;
          end
        end
        default: st <= P_IDLE;
      endcase
    end
  end

endmodule
