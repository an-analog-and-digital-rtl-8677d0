// tb_mask_buffer: checks the all-ones reset mask, mask writes, and that the
// masked indices are U with the masked-out tokens removed.
module tb_mask_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, wr_en = 0;
  logic [63:0] wr_data, u, mask, masked, m_ref;
  mask_buffer dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_data = 0; u = {$urandom, $urandom};
    @(posedge clk); #1; rst_n = 1; m_ref = '1;
    checks++; if (masked !== u) failures++;
    for (int t = 0; t < 100; t++) begin
      wr_en = 1'($urandom); wr_data = {$urandom, $urandom};
      @(posedge clk); #1;
      if (wr_en) m_ref = wr_data;
      u = {$urandom, $urandom}; #1;
      checks++; if (masked !== (u & m_ref)) failures++;
      checks++; if (mask !== m_ref) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
