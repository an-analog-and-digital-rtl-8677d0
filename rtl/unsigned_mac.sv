// unsigned_mac: the unsigned MAC unit. 64 lanes accumulate p * v[n] (12-bit
// probability times unsigned 8-bit value) over the kept tokens of a query;
// clr empties the lanes. out[n] = saturate12(acc[n] >> 8), i.e. the
// probability-weighted value in Q8.4, is what goes to the output buffer.
// Accumulation takes effect at the clock edge where en is high. Lane count
// and widths follow the chip; the output scaling is this design's choice.
module unsigned_mac
  import attn_pkg::*;
#(
  parameter int DD = D
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  input  logic [P_W-1:0]   p,
  input  logic [7:0]       v [DD],
  output logic [O_W-1:0]   out [DD]
);
  logic [23:0] acc [DD];

  always_ff @(posedge clk) begin
    for (int n = 0; n < DD; n++) begin
      if (!rst_n || clr) acc[n] <= '0;
      else if (en)       acc[n] <= acc[n] + 24'(p * v[n]);
    end
  end

  always_comb
    for (int n = 0; n < DD; n++)
      out[n] = (acc[n][23:8] > 16'd4095) ? 12'd4095 : acc[n][19:8];
endmodule
