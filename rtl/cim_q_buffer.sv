// cim_q_buffer: the CIM Q buffer (1Kb). Holds the 4 MSBs of every element of
// up to four queries and, during the multiply phase of the CIM operation,
// drives one bit-plane of the selected query onto the 64 read wordlines
// (RWL[n] = q_n[qbit]). It also flags elements that are zero, which the SSCS
// engine uses to remove those columns from charge sharing.
// Interface: host writes 64-bit words of 16 x 4-bit elements (word w holds
// elements 16w..16w+15). The RWL and zero-flag outputs are combinational in
// rd_q/qbit/rwl_en. The 1Kb size is the chip's; the four-slot organisation and
// write word layout are this design's choice.
module cim_q_buffer
  import attn_pkg::*;
#(
  parameter int NQ = N_Q,
  parameter int DD = D
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [$clog2(NQ)-1:0]  wr_q,
  input  logic [1:0]             wr_word,
  input  logic [63:0]            wr_data,
  input  logic [$clog2(NQ)-1:0]  rd_q,
  input  logic [1:0]             qbit,
  input  logic                   rwl_en,
  output logic [DD-1:0]          rwl,
  output logic [DD-1:0]          q_zero
);
  logic [MW-1:0] mem [NQ][DD];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int i = 0; i < 16; i++)
        if (int'(wr_word) * 16 + i < DD)
          mem[wr_q][int'(wr_word) * 16 + i] <= wr_data[4*i +: 4];
    end
  end

  always_comb begin
    for (int n = 0; n < DD; n++) begin
      rwl[n]    = rwl_en & mem[rd_q][n][qbit];
      q_zero[n] = (mem[rd_q][n] == '0);
    end
  end
endmodule
