// softmax_unit: exponent, sum and division of the softmax. The 8-bit score
// s is read as Q3.4, x = s/16. exp(x) is split as exp(m) * exp(l/16) with
// m = s[7:4] (signed) and l = s[3:0], looked up in two 16-entry tables and
// multiplied:
//   EXP_MSB[m+8] = round(e^m * 2^12),   m = -8..7
//   EXP_LSB[l]   = round(e^(l/16) * 2^10), l = 0..15
//   e = (EXP_MSB * EXP_LSB) >> 10  =  exp(x) in units of 2^-12 (24 bits).
// acc_en adds e to a 32-bit sum (cleared by clr). The probability output is
// combinational: p = min(4095, floor(e * 2^12 / sum)), Q0.12, 0 when the
// sum is zero. A query is handled in two passes, sums first, then p.
// The two-table exponent, the accumulator and the divider follow the chip;
// the number formats and table rounding are this design's choice.
module softmax_unit
  import attn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              acc_en,
  input  logic signed [7:0] s,
  output logic [23:0]       e,
  output logic [31:0]       sum,
  output logic [P_W-1:0]    p
);
  localparam logic [22:0] EXP_MSB [16] = '{
    23'd1, 23'd4, 23'd10, 23'd28, 23'd75, 23'd204, 23'd554, 23'd1507,
    23'd4096, 23'd11134, 23'd30266, 23'd82270, 23'd223634, 23'd607900,
    23'd1652444, 23'd4491809};
  localparam logic [11:0] EXP_LSB [16] = '{
    12'd1024, 12'd1090, 12'd1160, 12'd1235, 12'd1315, 12'd1400, 12'd1490, 12'd1586,
    12'd1688, 12'd1797, 12'd1913, 12'd2036, 12'd2168, 12'd2308, 12'd2456, 12'd2615};

  logic [34:0] prod;
  logic [43:0] quot;
  logic [3:0]  mi;

  always_comb begin
    mi   = s[7:4] ^ 4'b1000;          // signed nibble + 8
    prod = 35'(EXP_MSB[mi]) * 35'(EXP_LSB[s[3:0]]);
    e    = prod[33:10];
    if (sum == 0) quot = '0;
    else          quot = {8'd0, e, 12'd0} / {12'd0, sum};
    p    = (quot > 44'd4095) ? 12'd4095 : quot[11:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) sum <= '0;
    else if (acc_en)   sum <= sum + {8'd0, e};
  end
endmodule
