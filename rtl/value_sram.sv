// value_sram: the 4KB value SRAM. Word 8*tok + t holds the 8-bit elements
// 8t..8t+7 of value vector tok (element 8t+i in bits 8i+7..8i). One
// synchronous write port for the host and one read port for the selective
// fetch engine; rdata is valid the cycle after re. Written as an array, not
// as a compiled macro. Size follows the chip; the word layout is this
// design's choice.
module value_sram #(
  parameter int WORDS = 512,
  parameter int W     = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
