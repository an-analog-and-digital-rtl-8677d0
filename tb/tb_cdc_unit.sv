// tb_cdc_unit: CIM clock 10 ns, digital clock 7 ns. Sends 20 masked-index
// records across and checks they arrive complete and in order; sends 24
// read addresses from the digital side, lets the unit serve them from a
// model of the array's read port (data = a function of the address, one
// cycle latency) and checks the 24 replies and their order. The digital
// side pops at random times so the FIFOs fill up.
module tb_cdc_unit;
  import attn_pkg::*;
  logic clk_a = 0, clk_d = 0;
  always #5 clk_a = ~clk_a;
  always #3.5 clk_d = ~clk_d;
  int checks = 0, failures = 0;
  logic rst_a_n = 0, rst_d_n = 0;
  logic idx_push = 0, idx_full, idx_pop = 0, idx_empty;
  idx_rec_t idx_wdata, idx_rdata;
  logic req_push = 0, req_full, rsp_pop = 0, rsp_empty;
  logic [8:0] req_addr, arr_addr;
  logic [31:0] rsp_data, arr_rdata;
  logic arr_re;
  idx_rec_t sent [20];
  cdc_unit dut (.*);

  function automatic logic [31:0] f(logic [8:0] a);
    return {a, 7'h55, ~a, 7'h2a};
  endfunction
  always @(posedge clk_a) if (arr_re) arr_rdata <= f(arr_addr);

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // CIM side producer
  initial begin
    repeat (3) @(posedge clk_a); #1; rst_a_n = 1;
    repeat (3) @(posedge clk_a); #1;
    for (int i = 0; i < 20; i++) begin
      sent[i].qi = 2'(i);
      sent[i].u = {$urandom, $urandom};
      idx_wdata = sent[i];
      idx_push = 1;
      @(posedge clk_a);
      while (idx_full) @(posedge clk_a);
      #1; idx_push = 0;
    end
  end

  // digital side
  initial begin
    int got, nreq, nrsp;
    repeat (3) @(posedge clk_d); #1; rst_d_n = 1;
    got = 0; nreq = 0; nrsp = 0;
    repeat (30) @(posedge clk_d);
    #1;
    while (got < 20 || nrsp < 24) begin
      req_push = (nreq < 24) && !req_full;
      req_addr = 9'(nreq * 37 + 5);
      idx_pop = !idx_empty && ($urandom_range(0, 2) == 0);
      rsp_pop = !rsp_empty && ($urandom_range(0, 2) == 0);
      if (idx_pop) begin
        checks++; if (idx_rdata !== sent[got]) failures++;
        got++;
      end
      if (rsp_pop) begin
        checks++; if (rsp_data !== f(9'(nrsp * 37 + 5))) failures++;
        nrsp++;
      end
      if (req_push) nreq++;
      @(posedge clk_d); #1;
    end
    idx_pop = 0; rsp_pop = 0; req_push = 0;
    repeat (10) @(posedge clk_d);
    checks++; if (!idx_empty || !rsp_empty) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
