// mask_buffer: the 64-bit mask buffer and the gating of the pruning indices.
// The host writes a token mask (bit j = 1: key j is a valid token); the
// masked indices handed to the digital core are U AND mask, so padding
// tokens are never fetched even when the comparator keeps them. The mask
// resets to all ones. The chip shows the buffer and the 64-bit gating; the
// meaning of a mask bit is this design's choice.
module mask_buffer #(
  parameter int N = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [N-1:0] wr_data,
  input  logic [N-1:0] u,
  output logic [N-1:0] mask,
  output logic [N-1:0] masked
);
  always_ff @(posedge clk) begin
    if (!rst_n)     mask <= '1;
    else if (wr_en) mask <= wr_data;
  end
  assign masked = u & mask;
endmodule
