// sqj_ctrl: sequencer of one convolution layer on the accelerator.
//
// After start it latches the layer arguments and runs these phases, one
// after another:
//   1. parameter load: starts param_loader and waits for its done;
//   2. (K=3) ITB initialisation: the first two input rows, X_i*C_i
//      activations each, are written to logical ITB lines 1 and 2;
//   3. for every output row (K=3): the ITB is shifted down one row, the
//      first two pixels of the next input row are written to the lowest
//      line, and ITB columns 0 and 1 are copied into ITWB columns 1 and 2;
//   4. for every output pixel: one input pixel (C_i activations) is written
//      to the ITB, the ITWB is shifted one column (K=3) and the new ITB
//      column is copied into ITWB column 2 (3*C_i/CI_MIN vectors); then
//      every MAC unit is issued its C_o/NU kernels, K*K*C_i/CI_MIN vectors
//      each, one vector per cycle with no gap between kernels; after the
//      last result has been written to the fmap_o buffers the pixel is
//      streamed out, C_o activations in channel order, one per cycle while
//      the output is ready.
// For K=1 there is no ITB initialisation or shifting: each pixel is written
// at address 0 of ITB line 2 and copied from there into ITWB column 2.
// X_i and Y_i are the dimensions of the already padded input; the output is
// (Y_i-K+1) x (X_i-K+1) x C_o (stride 1). Memory reads have one cycle of
// latency; the MAC control tags (mac_*) are delayed by one cycle to arrive
// with the weight and window vectors. done is high in the last busy cycle,
// so the status register shows done as soon as busy falls. The phase order follows the published
// operation description; phases are not overlapped, which is this design's
// choice, as are the K=1 data path and the assumption of a padded input.
module sqj_ctrl
  import sqj_pkg::*;
#(
  parameter int unsigned NU         = 8,
  parameter int unsigned LINE_ELEMS = sqj_pkg::ITB_LINE,
  parameter int unsigned CI_MAXP    = sqj_pkg::CI_MAX,
  parameter int unsigned WT_ELEMS   = sqj_pkg::WT_TOTAL / NU,
  parameter int unsigned SLOTS      = sqj_pkg::CO_MAX / NU,
  localparam int unsigned UW        = (NU > 1) ? $clog2(NU) : 1,
  localparam int unsigned IEAW      = $clog2(LINE_ELEMS),
  localparam int unsigned IVAW      = $clog2(LINE_ELEMS / CI_MIN),
  localparam int unsigned WAW       = $clog2(3 * CI_MAXP / CI_MIN),
  localparam int unsigned WVAW      = $clog2(WT_ELEMS / CI_MIN),
  localparam int unsigned JW        = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  cfg_t            cfg,
  output cfg_t            cfg_q,
  output logic            busy,
  output logic            done,
  // parameter loader
  output logic            par_start,
  input  logic            par_done,
  // input feature map stream
  input  logic            fmi_valid,
  output logic            fmi_ready,
  // ITB
  output logic            itb_sh,
  output logic            itb_we,
  output logic [1:0]      itb_wr_row,
  output logic [IEAW-1:0] itb_wr_addr,
  output logic [1:0]      itb_rd_row,
  output logic [IVAW-1:0] itb_rd_addr,
  // ITWB (same controls for every unit)
  output logic            itwb_sh,
  output logic            itwb_we,
  output logic [1:0]      itwb_wr_col,
  output logic [WAW-1:0]  itwb_wr_addr,
  output logic [1:0]      itwb_rd_col,
  output logic [WAW-1:0]  itwb_rd_addr,
  // weights / bias reads
  output logic [WVAW-1:0] wt_rd_addr,
  output logic [JW-1:0]   b_rd_addr,
  // MAC tags, aligned with the buffer outputs
  output logic            mac_valid,
  output logic            mac_first,
  output logic            mac_last,
  output logic [JW-1:0]   mac_idx,
  input  logic            res_valid,
  // output pixel
  output logic [JW-1:0]   fo_rd_addr,
  output logic [UW-1:0]   fo_sel,
  output logic            fmo_valid,
  input  logic            fmo_ready
);

  typedef enum logic [3:0] {
    S_IDLE, S_PSTART, S_LOADP, S_INIT, S_RSHIFT, S_RPIX, S_COPY, S_CWAIT,
    S_CPIX, S_CSHIFT, S_COMP, S_DRAIN, S_OPRE, S_OUT, S_DONE
  } st_t;

  st_t st, after_copy;

  // derived layer sizes
  logic [5:0]  g_n;        // C_i / CI_MIN
  logic [1:0]  k_n;        // K
  logic [9:0]  xo_n, yo_n;
  logic [8:0]  nj;         // kernels per unit
  logic [15:0] row_elems;  // X_i * C_i

  // counters
  logic [15:0] ea;         // ITB element address (K=3)
  logic [9:0]  c_cnt;      // element inside a pixel
  logic        irow;       // ITB init row
  logic [9:0]  xo, yo;
  logic [8:0]  oc;         // output channel being streamed
  logic [8:0]  res_cnt;
  // copy engine
  logic [15:0] cp_base;    // ITB vector address of the column
  logic [1:0]  cp_col;     // ITWB logical column written
  logic [1:0]  cp_left;    // columns left
  logic [1:0]  cp_kh;
  logic [5:0]  cp_g;
  logic [7:0]  cp_a;       // ITWB address inside the column
  // compute issue
  logic [15:0] wva;
  logic [8:0]  cj;
  logic [1:0]  ckh, ckw;
  logic [5:0]  cg;
  logic [7:0]  c_iab;      // ckh * g_n

  logic fmi_fire, fmo_fire;
  logic [8:0] oc_next;

  assign busy      = (st != S_IDLE);
  assign done      = (st == S_DONE);   // last busy cycle
  assign fmi_ready = (st == S_INIT) || (st == S_RPIX) || (st == S_CPIX);
  assign fmi_fire  = fmi_valid && fmi_ready;
  assign fmo_valid = (st == S_OUT);
  assign fmo_fire  = fmo_valid && fmo_ready;
  assign par_start = (st == S_PSTART);
  assign itb_sh    = (st == S_RSHIFT);
  assign itwb_sh   = (st == S_CSHIFT);

  assign itb_we      = fmi_fire;
  assign itb_wr_row  = (st == S_INIT) ? {1'b0, irow} + 2'd1 : 2'd2;
  assign itb_wr_addr = cfg_q.k3 ? IEAW'(ea) : IEAW'(c_cnt);
  assign itb_rd_row  = cfg_q.k3 ? cp_kh : 2'd2;
  assign itb_rd_addr = IVAW'(cp_base + 16'(cp_g));

  assign itwb_rd_col  = cfg_q.k3 ? ckw : 2'd2;
  assign itwb_rd_addr = WAW'(c_iab + 8'(cg));
  assign wt_rd_addr   = WVAW'(wva);
  assign b_rd_addr    = JW'(cj);

  assign oc_next    = (st == S_OUT && fmo_fire) ? oc + 1'b1 : oc;
  assign fo_rd_addr = JW'(oc_next / NU);
  assign fo_sel     = UW'(oc % NU);

  logic cp_last_vec, cp_last_col, c_first, c_last, c_end;
  assign cp_last_vec = (cp_g == g_n - 1'b1) && (!cfg_q.k3 || cp_kh == 2'd2);
  assign cp_last_col = cp_last_vec && (cp_left == 2'd1);
  assign c_first = (ckh == 0) && (ckw == 0) && (cg == 0);
  assign c_last  = (ckh == k_n - 1'b1) && (ckw == k_n - 1'b1) && (cg == g_n - 1'b1);
  assign c_end   = c_last && (cj == nj - 1'b1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE;
      after_copy <= S_IDLE;
      cfg_q <= '0;
      g_n <= '0; k_n <= '0; xo_n <= '0; yo_n <= '0; nj <= '0; row_elems <= '0;
      ea <= '0; c_cnt <= '0; irow <= 1'b0; xo <= '0; yo <= '0; oc <= '0; res_cnt <= '0;
      cp_base <= '0; cp_col <= '0; cp_left <= '0; cp_kh <= '0; cp_g <= '0; cp_a <= '0;
      wva <= '0; cj <= '0; ckh <= '0; ckw <= '0; cg <= '0; c_iab <= '0;
      itwb_we <= 1'b0; itwb_wr_col <= '0; itwb_wr_addr <= '0;
      mac_valid <= 1'b0; mac_first <= 1'b0; mac_last <= 1'b0; mac_idx <= '0;
    end else begin
      // delayed ITWB write of the copy engine (ITB read latency)
      itwb_we      <= (st == S_COPY);
      itwb_wr_col  <= cp_col;
      itwb_wr_addr <= WAW'(cp_a);
      // delayed MAC tags (weights / ITWB read latency)
      mac_valid <= (st == S_COMP);
      mac_first <= c_first;
      mac_last  <= c_last;
      mac_idx   <= JW'(cj);
      if (res_valid) res_cnt <= res_cnt + 1'b1;

      case (st)
        S_IDLE: if (start) begin
          cfg_q     <= cfg;
          g_n       <= 6'(cfg.ci / CI_MIN);
          k_n       <= cfg.k3 ? 2'd3 : 2'd1;
          xo_n      <= cfg.k3 ? cfg.xi - 10'd2 : cfg.xi;
          yo_n      <= cfg.k3 ? cfg.yi - 10'd2 : cfg.yi;
          nj        <= 9'(cfg.co / NU);
          row_elems <= 16'(cfg.xi) * 16'(cfg.ci);
          st        <= S_PSTART;
        end
        S_PSTART: st <= S_LOADP;
        S_LOADP: if (par_done) begin
          ea <= '0; irow <= 1'b0; xo <= '0; yo <= '0; c_cnt <= '0;
          st <= cfg_q.k3 ? S_INIT : S_CPIX;
        end
        S_INIT: if (fmi_fire) begin
          if (ea == row_elems - 1'b1) begin
            ea   <= '0;
            irow <= 1'b1;
            if (irow) st <= S_RSHIFT;
          end else begin
            ea <= ea + 1'b1;
          end
        end
        S_RSHIFT: begin
          ea <= '0;
          st <= S_RPIX;
        end
        S_RPIX: if (fmi_fire) begin
          ea <= ea + 1'b1;
          if (ea == 16'(cfg_q.ci) * 16'd2 - 1'b1) begin
            cp_base <= '0; cp_col <= 2'd1; cp_left <= 2'd2;
            cp_kh <= '0; cp_g <= '0; cp_a <= '0;
            after_copy <= S_CPIX;
            c_cnt <= '0;
            st <= S_COPY;
          end
        end
        S_CPIX: if (fmi_fire) begin
          ea    <= ea + 1'b1;
          c_cnt <= c_cnt + 1'b1;
          if (c_cnt == cfg_q.ci - 1'b1) begin
            c_cnt <= '0;
            cp_kh <= '0; cp_g <= '0; cp_a <= '0; cp_col <= 2'd2; cp_left <= 2'd1;
            after_copy <= S_COMP;
            if (cfg_q.k3) begin
              cp_base <= 16'(xo + 10'd2) * 16'(g_n);
              st <= S_CSHIFT;
            end else begin
              cp_base <= '0;
              st <= S_COPY;
            end
          end
        end
        S_CSHIFT: st <= S_COPY;
        S_COPY: begin
          cp_a <= cp_a + 1'b1;
          if (cp_g == g_n - 1'b1) begin
            cp_g <= '0;
            cp_kh <= cp_kh + 1'b1;
          end else begin
            cp_g <= cp_g + 1'b1;
          end
          if (cp_last_vec) begin
            cp_kh   <= '0;
            cp_a    <= '0;
            cp_col  <= cp_col + 1'b1;
            cp_base <= cp_base + 16'(g_n);
            cp_left <= cp_left - 1'b1;
            if (cp_last_col) st <= S_CWAIT;
          end
        end
        S_CWAIT: begin
          wva <= '0; cj <= '0; ckh <= '0; ckw <= '0; cg <= '0; c_iab <= '0;
          res_cnt <= '0;
          st <= after_copy;
        end
        S_COMP: begin
          wva <= wva + 1'b1;
          if (cg == g_n - 1'b1) begin
            cg <= '0;
            if (ckw == k_n - 1'b1) begin
              ckw <= '0;
              if (ckh == k_n - 1'b1) begin
                ckh   <= '0;
                c_iab <= '0;
                cj    <= cj + 1'b1;
              end else begin
                ckh   <= ckh + 1'b1;
                c_iab <= c_iab + 8'(g_n);
              end
            end else begin
              ckw <= ckw + 1'b1;
            end
          end else begin
            cg <= cg + 1'b1;
          end
          if (c_end) st <= S_DRAIN;
        end
        S_DRAIN: if (res_cnt == nj) begin
          oc <= '0;
          st <= S_OPRE;
        end
        S_OPRE: st <= S_OUT;
        S_OUT: if (fmo_fire) begin
          oc <= oc + 1'b1;
          if (oc == cfg_q.co - 1'b1) begin
            if (xo == xo_n - 1'b1) begin
              xo <= '0;
              if (yo == yo_n - 1'b1) begin
                st <= S_DONE;
              end else begin
                yo <= yo + 1'b1;
                st <= cfg_q.k3 ? S_RSHIFT : S_CPIX;
              end
            end else begin
              xo <= xo + 1'b1;
              st <= S_CPIX;
            end
          end
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
