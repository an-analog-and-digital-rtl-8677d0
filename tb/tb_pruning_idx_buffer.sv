// tb_pruning_idx_buffer: checks reset to zero, capture only on cap, holding
// between captures, and the population count of the stored vector.
module tb_pruning_idx_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, cap = 0;
  logic [63:0] u_in, u, held;
  logic [6:0] n_kept;
  pruning_idx_buffer dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    u_in = '1;
    @(posedge clk); #1; rst_n = 1;
    checks++; if (u !== 0) failures++;
    held = 0;
    for (int t = 0; t < 100; t++) begin
      u_in = {$urandom, $urandom}; cap = 1'($urandom);
      @(posedge clk); #1;
      if (cap) held = u_in;
      checks++; if (u !== held) failures++;
      checks++; if (n_kept !== 7'($countones(held))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
