// q_buffer: the 2Kb query buffer of the digital processor: four slots of 64
// signed 8-bit query elements. The host writes 64-bit words of 8 elements
// (word w of slot q holds elements 8w..8w+7, element 8w+i in bits 8i+7..8i);
// the whole selected query is read combinationally by the signed MAC unit.
// Capacity follows the chip; slot count and word layout are this design's.
module q_buffer
  import attn_pkg::*;
#(
  parameter int NQ = N_Q,
  parameter int DD = D
) (
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic [$clog2(NQ)-1:0] wr_q,
  input  logic [2:0]            wr_word,
  input  logic [63:0]           wr_data,
  input  logic [$clog2(NQ)-1:0] rd_q,
  output logic signed [7:0]     q_row [DD]
);
  logic signed [7:0] mem [NQ][DD];
  always_ff @(posedge clk) begin
    if (wr_en)
      for (int i = 0; i < 8; i++)
        if (int'(wr_word) * 8 + i < DD) mem[wr_q][int'(wr_word) * 8 + i] <= wr_data[8*i +: 8];
  end
  always_comb for (int n = 0; n < DD; n++) q_row[n] = mem[rd_q][n];
endmodule
