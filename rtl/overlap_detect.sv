// overlap_detect: the data overlap detection engine. Given the masked indices
// u of a query and the set of tokens whose K/V vectors are already held in
// the K/V buffer, it marks the tokens that must be fetched (kept and not
// held) and those that are reused (kept and held), and counts both.
// Combinational. Function follows the chip; the counts are this design's.
module overlap_detect #(
  parameter int N = 64
) (
  input  logic [N-1:0]       u,
  input  logic [N-1:0]       resident,
  output logic [N-1:0]       fetch,
  output logic [N-1:0]       reuse,
  output logic [$clog2(N):0] n_fetch,
  output logic [$clog2(N):0] n_reuse
);
  always_comb begin
    fetch   = u & ~resident;
    reuse   = u & resident;
    n_fetch = '0;
    n_reuse = '0;
    for (int j = 0; j < N; j++) begin
      n_fetch += ($clog2(N)+1)'(fetch[j]);
      n_reuse += ($clog2(N)+1)'(reuse[j]);
    end
  end
endmodule
