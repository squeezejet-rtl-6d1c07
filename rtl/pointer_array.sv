// pointer_array: hardware model of an array of pointers to the rows of a
// two-dimensional buffer.
//
// Entry a holds the physical index of logical line a. A shift (sh) rotates
// every entry by one, so the oldest line (logical 0) becomes the lowest
// line (logical N-1) and is the only one to be rewritten; no data moves in
// the line buffers. With N = 3 the contents after 0, 1, 2, 3 shifts are
// AD0 = 0,1,2,0; AD1 = 1,2,0,1; AD2 = 2,0,1,2, as in the published pointer
// table. Lookups (ad -> do_) are combinational; the shift takes effect on
// the next clock edge. NPORTS independent lookups are provided (the ITB
// uses one for its write line and one for its read line); reset restores
// the shift-0 contents. Multiple lookup ports and the reset value are this
// design's choices.
module pointer_array #(
  parameter int unsigned N      = 3,
  parameter int unsigned NPORTS = 2,
  localparam int unsigned AW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       sh,
  input  logic [NPORTS-1:0][AW-1:0]  ad,
  output logic [NPORTS-1:0][AW-1:0]  do_
);

  logic [N-1:0][AW-1:0] ptr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int a = 0; a < N; a++) ptr[a] <= AW'(a);
    end else if (sh) begin
      for (int a = 0; a < N; a++)
        ptr[a] <= (ptr[a] == AW'(N-1)) ? '0 : ptr[a] + 1'b1;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) do_[p] = ptr[ad[p]];
  end

endmodule
