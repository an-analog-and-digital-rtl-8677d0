// pruning_idx_buffer: the 64-bit pruning index buffer. On cap it stores the
// comparator decisions of one query as the vector U (u_j = 1: key j is not
// pruned) and holds it until the next capture; n_kept is its population
// count, used for statistics. Synchronous reset to all zeros. The register
// follows the chip; the population count is this design's addition.
module pruning_idx_buffer #(
  parameter int N = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cap,
  input  logic [N-1:0]         u_in,
  output logic [N-1:0]         u,
  output logic [$clog2(N):0]   n_kept
);
  always_ff @(posedge clk) begin
    if (!rst_n)   u <= '0;
    else if (cap) u <= u_in;
  end

  always_comb begin
    n_kept = '0;
    for (int j = 0; j < N; j++) n_kept += ($clog2(N)+1)'(u[j]);
  end
endmodule
