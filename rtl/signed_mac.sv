// signed_mac: the signed MAC unit of the digital processor. 64 signed
// 8 x 8-bit multipliers feed an adder tree; the dot product q.k is
// registered (one cycle from in_valid to out_valid) both in full (acc) and
// as the 8-bit score s = saturate(acc >>> SHIFT). With q and k read as Q3.4
// numbers and the 1/sqrt(64) attention scale folded in, SHIFT = 7 gives s
// in Q3.4. The unit and the 8-bit score width follow the chip; the scaling
// and the register stage are this design's choice.
module signed_mac
  import attn_pkg::*;
#(
  parameter int DD    = D,
  parameter int SHIFT = 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [7:0]  q [DD],
  input  logic signed [7:0]  k [DD],
  output logic               out_valid,
  output logic signed [7:0]  s,
  output logic signed [21:0] acc
);
  logic signed [21:0] sum;
  logic signed [21:0] shifted;

  always_comb begin
    sum = '0;
    for (int n = 0; n < DD; n++) sum += 22'(q[n] * k[n]);
    shifted = sum >>> SHIFT;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      s         <= '0;
      acc       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        acc <= sum;
        if (shifted > 22'sd127)       s <= 8'sd127;
        else if (shifted < -22'sd128) s <= -8'sd128;
        else                          s <= shifted[7:0];
      end
    end
  end
endmodule
