// tb_key_lsb_sram: writes random words to random addresses, keeps a copy, and
// checks reads, including the one-cycle read latency and that a read does
// not change when only the address changes.
module tb_key_lsb_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, re = 0;
  logic [8:0] waddr, raddr;
  logic [32-1:0] wdata, rdata;
  logic [32-1:0] ref_m [512];
  logic written [512];
  key_lsb_sram dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 512; a++) written[a] = 0;
    for (int t = 0; t < 600; t++) begin
      we = 1; waddr = 9'($urandom); wdata = {$urandom, $urandom};
      ref_m[waddr] = wdata; written[waddr] = 1;
      @(posedge clk); #1;
    end
    we = 0;
    for (int a = 0; a < 512; a++) if (written[a]) begin
      re = 1; raddr = 9'(a);
      @(posedge clk); #1;
      re = 0; raddr = 9'(a + 1);
      checks++; if (rdata !== ref_m[a]) failures++;
      @(posedge clk); #1;
      checks++; if (rdata !== ref_m[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
