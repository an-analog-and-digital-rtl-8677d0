// output_buffer: the 3Kb output buffer: four slots of 64 x 12-bit attention
// outputs. The digital core writes a whole slot in one cycle when a query is
// finished; the host reads one element at a time, combinationally. Capacity
// follows the chip; the slot count and the element-wise read are this
// design's choice.
module output_buffer
  import attn_pkg::*;
#(
  parameter int NQ = N_Q,
  parameter int DD = D
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [$clog2(NQ)-1:0] wq,
  input  logic [O_W-1:0]        wdata [DD],
  input  logic [$clog2(NQ)-1:0] rd_q,
  input  logic [$clog2(DD)-1:0] rd_n,
  output logic [O_W-1:0]        rdata
);
  logic [O_W-1:0] mem [NQ][DD];
  always_ff @(posedge clk) if (we) mem[wq] <= wdata;
  assign rdata = mem[rd_q][rd_n];
endmodule
