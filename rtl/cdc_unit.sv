// cdc_unit: the CDC management unit between the CIM clock domain (clk_a) and
// the digital clock domain (clk_d). It holds three asynchronous FIFOs:
//   idx : {query slot, masked indices} records, CIM -> digital;
//   req : standard-read addresses of the CIM array, digital -> CIM;
//   rsp : 32-bit K_MSB read data, CIM -> digital.
// On the CIM side it serves the req FIFO itself: it pops an address, issues
// a standard read (arr_re/arr_addr) and pushes arr_rdata into rsp on the next
// cycle; one read is in flight at a time, so rsp never overflows. Responses
// stay in request order. Only the unit's name and position come from the
// chip; the FIFO structure, depths and the read server are this design's.
module cdc_unit
  import attn_pkg::*;
#(
  parameter int AW_FIFO = 3
) (
  input  logic                 clk_a,
  input  logic                 rst_a_n,
  input  logic                 clk_d,
  input  logic                 rst_d_n,
  // masked indices, CIM side
  input  logic                 idx_push,
  input  idx_rec_t             idx_wdata,
  output logic                 idx_full,
  // masked indices, digital side
  input  logic                 idx_pop,
  output idx_rec_t             idx_rdata,
  output logic                 idx_empty,
  // fetch addresses, digital side
  input  logic                 req_push,
  input  logic [CIM_AW-1:0]    req_addr,
  output logic                 req_full,
  // K_MSB data, digital side
  input  logic                 rsp_pop,
  output logic [31:0]          rsp_data,
  output logic                 rsp_empty,
  // CIM array standard read port
  output logic                 arr_re,
  output logic [CIM_AW-1:0]    arr_addr,
  input  logic [31:0]          arr_rdata
);
  logic              a_req_empty, a_rsp_full, pending;
  logic [CIM_AW-1:0] a_req_addr;

  async_fifo #(.W($bits(idx_rec_t)), .AW(AW_FIFO)) u_idx (
    .wclk(clk_a), .wrst_n(rst_a_n), .wr_en(idx_push), .wdata(idx_wdata), .full(idx_full),
    .rclk(clk_d), .rrst_n(rst_d_n), .rd_en(idx_pop), .rdata(idx_rdata), .empty(idx_empty)
  );

  async_fifo #(.W(CIM_AW), .AW(AW_FIFO)) u_req (
    .wclk(clk_d), .wrst_n(rst_d_n), .wr_en(req_push), .wdata(req_addr), .full(req_full),
    .rclk(clk_a), .rrst_n(rst_a_n), .rd_en(arr_re), .rdata(a_req_addr), .empty(a_req_empty)
  );

  async_fifo #(.W(32), .AW(AW_FIFO)) u_rsp (
    .wclk(clk_a), .wrst_n(rst_a_n), .wr_en(pending), .wdata(arr_rdata), .full(a_rsp_full),
    .rclk(clk_d), .rrst_n(rst_d_n), .rd_en(rsp_pop), .rdata(rsp_data), .empty(rsp_empty)
  );

  assign arr_re   = !a_req_empty && !a_rsp_full && !pending;
  assign arr_addr = a_req_addr;

  always_ff @(posedge clk_a) begin
    if (!rst_a_n) pending <= 1'b0;
    else          pending <= arr_re;
  end
endmodule
