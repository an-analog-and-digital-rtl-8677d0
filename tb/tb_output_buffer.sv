// tb_output_buffer: writes random 64 x 12-bit rows into the four slots in
// random order and checks every element through the read port.
module tb_output_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [1:0] wq, rd_q;
  logic [5:0] rd_n;
  logic [11:0] wdata [64];
  logic [11:0] rdata;
  logic [11:0] ref_o [4][64];
  output_buffer dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 8; t++) begin
      wq = 2'(t % 4 == 0 ? 3 - t / 4 : $urandom);
      for (int n = 0; n < 64; n++) begin wdata[n] = 12'($urandom); ref_o[wq][n] = wdata[n]; end
      we = 1; @(posedge clk); #1; we = 0;
    end
    for (int q = 0; q < 4; q++)
      for (int n = 0; n < 64; n++) begin
        rd_q = 2'(q); rd_n = 6'(n); #1;
        checks++; if (rdata !== ref_o[q][n]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
