// stream_fifo: synchronous FIFO with a valid/ready handshake on both sides,
// used on each of the accelerator's three streams (parameters, input
// feature map, output feature map).
//
// A word is written when s_valid && s_ready and read when m_valid &&
// m_ready. s_ready is low while the FIFO is full and m_valid is high while
// it is not empty; the head word is presented on m_data without delay
// (first-word fall-through). DEPTH must be a power of two. The accelerator
// uses FIFO stream interfaces as published; the handshake and the depth are
// this design's choices.
module stream_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign s_ready = (wp - rp) != (AW+1)'(DEPTH);
  assign m_valid = wp != rp;
  assign m_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (s_valid && s_ready) begin
        mem[wp[AW-1:0]] <= s_data;
        wp <= wp + 1'b1;
      end
      if (m_valid && m_ready) rp <= rp + 1'b1;
    end
  end

  // a full FIFO never accepts, an empty one never delivers
  assert property (@(posedge clk) disable iff (!rst_n) (wp - rp) <= (AW+1)'(DEPTH));

endmodule
