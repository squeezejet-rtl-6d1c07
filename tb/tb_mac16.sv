// tb_mac16: drives back-to-back random 3D kernels of random length (1..40
// vectors) into mac16, one vector per cycle with no gap between kernels,
// and compares every finished channel with an independently computed
// bias + ReLU + requantisation result. Checks that a result appears exactly
// three cycles after the kernel's last vector (the pipeline latency) and
// that the unit sustains one vector (CI_MIN MACs) per cycle. Large operands
// exercise saturation, negative sums exercise the ReLU clamp.
module tb_mac16;
  import sqj_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [4:0] in_idx = 0;
  act_vec_t act = '0;
  wt_vec_t wt = '0;
  wt_t bias = '0;
  logic out_valid;
  logic [4:0] out_idx;
  act_t out_data;
  int checks = 0, failures = 0, cyc = 0;
  int n_sat = 0, n_relu = 0;

  typedef struct { int idx; act_t val; int due; } exp_t;
  exp_t q[$];

  mac16 #(.IDX_W(5)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: every result matches the next expected one, on time
  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected result"); end
      else begin
        e = q.pop_front();
        if (out_data !== e.val || out_idx !== 5'(e.idx) || cyc != e.due) begin
          failures++;
          if (failures < 10) $display("FAIL idx=%0d got %0d exp %0d at %0d due %0d",
                                      e.idx, out_data, e.val, cyc, e.due);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      automatic int len = $urandom_range(1, 40);
      automatic int mode = $urandom_range(0, 2);   // 0 small, 1 large (saturation), 2 mixed
      automatic longint s = 0;
      longint r;
      act_t ev;
      automatic wt_t bb = wt_t'($urandom);
      for (int v = 0; v < len; v++) begin
        @(negedge clk);
        in_valid = 1; in_first = (v == 0); in_last = (v == len - 1);
        in_idx = 5'(k); bias = bb;
        for (int b = 0; b < CI_MIN; b++) begin
          act[b] = (mode == 1) ? act_t'($urandom_range(20000, 32767))
                               : act_t'($signed(16'($urandom_range(0, 2047)) - 16'd1024));
          wt[b]  = (mode == 1) ? wt_t'($urandom_range(60, 127)) : wt_t'($urandom);
          s += longint'($signed(act[b])) * longint'($signed(wt[b]));
        end
      end
      r = (s + (longint'(bb) <<< 3)) >>> 7;
      if (r < 0) begin ev = 0; n_relu++; end
      else if (r > 32767) begin ev = 32767; n_sat++; end
      else ev = act_t'(r);
      // last vector sampled at edge cyc+1; result registered at edge cyc+3
      q.push_back('{idx: k % 32, val: ev, due: cyc + 3});
    end
    @(negedge clk);
    in_valid = 0; in_first = 0; in_last = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    checks++;
    if (n_sat == 0 || n_relu == 0) begin failures++; $display("FAIL sat=%0d relu=%0d", n_sat, n_relu); end
    $display("saturated=%0d relu_clamped=%0d", n_sat, n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
