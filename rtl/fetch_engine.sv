// fetch_engine: the selective fetch engine. On start it copies token tok
// into K/V buffer slot slot from three memories, in 8 beats each:
//   CIM array (through the CDC unit): address {row 4*tok + t/2, half t%2},
//     one per cycle while the request FIFO has room; the 32-bit K_MSB
//     replies come back in order and are written as beats 0..7;
//   key LSB SRAM and value SRAM: word 8*tok + t, one per cycle, written into
//     the slot on the next cycle (1-cycle SRAM latency).
// done pulses for one cycle when all 24 beats are written; busy is high from
// start until then. start is ignored while busy. The three streams and the
// address layout are this design's choice; the block's role (fetch only the
// kept, non-resident tokens) follows the chip. kmsb_data is the CDC reply
// word forwarded unchanged: the K/V buffer stores it as it arrives.
module fetch_engine
  import attn_pkg::*;
#(
  parameter int NS = N_SLOT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [TOK_W-1:0]       tok,
  input  logic [$clog2(NS)-1:0]  slot,
  output logic                   busy,
  output logic                   done,
  // CIM read stream via CDC
  output logic                   req_push,
  output logic [CIM_AW-1:0]      req_addr,
  input  logic                   req_full,
  output logic                   rsp_pop,
  input  logic [31:0]            rsp_data,
  input  logic                   rsp_empty,
  // SRAM read ports
  output logic                   sram_re,
  output logic [SRAM_AW-1:0]     sram_addr,
  // K/V buffer write
  output logic [$clog2(NS)-1:0]  wr_slot,
  output logic                   kmsb_we,
  output logic [2:0]             kmsb_beat,
  output logic [31:0]            kmsb_data,
  output logic                   lsbv_we,
  output logic [2:0]             lsbv_beat
);
  logic [TOK_W-1:0] tok_r;
  logic [3:0]       n_req, n_rsp, n_rd;
  logic             rd_pend;
  logic [2:0]       rd_beat;

  logic [$clog2(NS)-1:0] slot_r;

  assign wr_slot   = slot_r;
  assign req_push  = busy && (n_req < 4'd8) && !req_full;
  assign req_addr  = {tok_r, n_req[2:1], n_req[0]};
  assign rsp_pop   = busy && (n_rsp < 4'd8) && !rsp_empty;
  assign kmsb_we   = rsp_pop;
  assign kmsb_beat = n_rsp[2:0];
  assign kmsb_data = rsp_data;
  assign sram_re   = busy && (n_rd < 4'd8);
  assign sram_addr = {tok_r, n_rd[2:0]};
  assign lsbv_we   = rd_pend;
  assign lsbv_beat = rd_beat;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      tok_r   <= '0;
      slot_r  <= '0;
      n_req   <= '0;
      n_rsp   <= '0;
      n_rd    <= '0;
      rd_pend <= 1'b0;
      rd_beat <= '0;
    end else begin
      done    <= 1'b0;
      rd_pend <= sram_re;
      rd_beat <= n_rd[2:0];
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          tok_r  <= tok;
          slot_r <= slot;
          n_req  <= '0;
          n_rsp  <= '0;
          n_rd   <= '0;
        end
      end else begin
        if (req_push) n_req <= n_req + 4'd1;
        if (rsp_pop)  n_rsp <= n_rsp + 4'd1;
        if (sram_re)  n_rd  <= n_rd + 4'd1;
        if ((n_rsp == 4'd8 || (n_rsp == 4'd7 && rsp_pop)) && n_rd == 4'd8 && !rd_pend) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
