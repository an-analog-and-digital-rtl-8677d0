// tb_comparator_bank: random differential inputs and thresholds; checks
// that decisions are latched only when en is high and that a token is kept
// exactly when V_POS - V_NEG reaches V_Th.
module tb_comparator_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0;
  real vpos [64];
  real vneg [64];
  real vth;
  logic [63:0] u, held;
  comparator_bank dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    held = 'x;
    for (int t = 0; t < 50; t++) begin
      vth = (real'($urandom_range(0, 200)) - 100.0) / 1000.0;
      for (int j = 0; j < 64; j++) begin
        vpos[j] = real'($urandom_range(0, 1000)) / 1000.0;
        vneg[j] = real'($urandom_range(0, 1000)) / 1000.0;
      end
      en = (t == 0) ? 1'b1 : 1'($urandom);
      @(posedge clk); #1;
      if (en) for (int j = 0; j < 64; j++) held[j] = (vpos[j] - vneg[j] >= vth);
      checks++; if (u !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
