// tb_fetch_engine: fetches several tokens into different slots. A model of
// the CDC FIFOs accepts requests when not (randomly) full and returns, in
// order and after random delays, data that is a function of the address;
// a model of the two SRAMs answers one cycle after each read. Checks: the
// eight CIM addresses {4*tok + t/2, t%2} in order, the eight SRAM words
// 8*tok + t, the K_MSB beats written in order with the right data, the
// LSB/V write strobes with the right beat numbers, the slot, and a single
// done pulse after all 24 beats.
module tb_fetch_engine;
  import attn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, start = 0;
  logic [5:0] tok;
  logic [3:0] slot, wr_slot;
  logic busy, done, req_push, req_full, rsp_pop, rsp_empty, sram_re;
  logic [8:0] req_addr, sram_addr, sram_addr_q;
  logic [31:0] rsp_data, kmsb_data;
  logic kmsb_we, lsbv_we;
  logic [2:0] kmsb_beat, lsbv_beat;
  logic [8:0] rsp_q [$];
  logic hold;
  fetch_engine dut (.*);

  function automatic logic [31:0] f(logic [8:0] a);
    return {a, 14'h1abc, ~a};
  endfunction

  assign req_full  = hold;
  assign rsp_empty = (rsp_q.size() == 0) || hold;
  assign rsp_data  = (rsp_q.size() != 0) ? f(rsp_q[0]) : '0;
  always @(posedge clk) begin
    hold <= ($urandom_range(0, 3) == 0);
    if (sram_re) sram_addr_q <= sram_addr;
    if (req_push) rsp_q.push_back(req_addr);
    if (rsp_pop) void'(rsp_q.pop_front());
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); #1; rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int nreq, nk, nl, nd, cyc;
      tok = 6'($urandom); slot = 4'($urandom);
      start = 1; @(posedge clk); #1; start = 0;
      nreq = 0; nk = 0; nl = 0; nd = 0; cyc = 0;
      while (nd == 0 && cyc < 500) begin
        if (req_push) begin
          checks++; if (req_addr !== 9'(tok * 8 + nreq)) failures++;
          nreq++;
        end
        if (sram_re) begin
          checks++; if (sram_addr[8:3] !== tok) failures++;
        end
        if (kmsb_we) begin
          checks++;
          if (int'(kmsb_beat) != nk || kmsb_data !== f(9'(tok * 8 + nk)) || wr_slot !== slot) failures++;
          nk++;
        end
        if (lsbv_we) begin
          checks++;
          if (int'(lsbv_beat) != nl || sram_addr_q !== 9'(tok * 8 + nl)) failures++;
          nl++;
        end
        if (done) nd++;
        @(posedge clk); #1;
        cyc++;
      end
      checks++; if (nreq != 8 || nk != 8 || nl != 8 || nd != 1 || busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
