// tb_cim_array: loads random bit-planes through the standard write port and
// reads them back (one-cycle latency). Then runs CIM operations with random
// RWL patterns and TG masks: precharge, multiply, accumulate, and checks each
// RBL voltage against VDD*(1 - ones/n), ones counting columns where stored
// bit, RWL and TG are all 1 and n the number of TG columns. One run issues
// standard reads during the CIM phases and checks them too.
module tb_cim_array;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, re = 0, prech = 0, mult = 0, acc = 0;
  logic [8:0] addr;
  logic [31:0] wdata, rdata;
  logic [63:0] rwl, tg_ctrl;
  real rbl_v [256];
  logic [63:0] ref_b [256];
  cim_array dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < 256; r++) begin
      ref_b[r] = {$urandom, $urandom};
      for (int h = 0; h < 2; h++) begin
        we = 1; addr = {8'(r), 1'(h)}; wdata = ref_b[r][32*h +: 32];
        @(posedge clk); #1;
      end
    end
    we = 0;
    for (int t = 0; t < 64; t++) begin
      int r, h;
      r = $urandom_range(0, 255); h = $urandom_range(0, 1);
      re = 1; addr = {8'(r), 1'(h)};
      @(posedge clk); #1; re = 0;
      checks++; if (rdata !== ref_b[r][32*h +: 32]) failures++;
    end
    for (int t = 0; t < 12; t++) begin
      int rr, hh;
      rwl = {$urandom, $urandom};
      tg_ctrl = (t % 3 == 0) ? '1 : {$urandom, $urandom} | 64'h1;
      rr = $urandom_range(0, 255); hh = $urandom_range(0, 1);
      prech = 1; @(posedge clk); #1; prech = 0;
      mult = 1; re = (t % 2 == 1); addr = {8'(rr), 1'(hh)};
      @(posedge clk); #1; mult = 0;
      if (re) begin
        checks++; if (rdata !== ref_b[rr][32*hh +: 32]) failures++;
      end
      re = 0;
      acc = 1; @(posedge clk); #1; acc = 0;
      for (int r = 0; r < 256; r++) begin
        real expv;
        expv = 1.0 - real'($countones(ref_b[r] & rwl & tg_ctrl)) / real'($countones(tg_ctrl));
        checks++;
        if (rbl_v[r] - expv > 1e-9 || expv - rbl_v[r] > 1e-9) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
