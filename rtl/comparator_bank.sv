// comparator_bank: BEHAVIOURAL MODEL of the 64 pruning comparators (analog).
// When en is high at a clock edge each comparator latches
// u[j] = (vpos[j] - vneg[j] >= vth): token j is kept when its approximate
// score reaches the threshold, pruned when it falls below. The comparators
// are ideal (no offset or noise). The keep-on-equal rule follows the
// "prune if q.k < threshold" rule of the design; applying V_Th to the
// difference of the two BLP outputs is this design's reading.
module comparator_bank #(
  parameter int N = 64
) (
  input  logic         clk,
  input  logic         en,
  input  real          vpos [N],
  input  real          vneg [N],
  input  real          vth,
  output logic [N-1:0] u
);
  always @(posedge clk) begin
    if (en)
      for (int j = 0; j < N; j++) u[j] <= (vpos[j] - vneg[j] >= vth);
  end
endmodule
