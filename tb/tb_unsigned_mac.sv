// tb_unsigned_mac: accumulates random probability/value sequences, checks
// every lane against sum(p * v) >> 8 saturated to 12 bits, checks that the
// lanes hold when en is low and clear on clr, and drives one saturating case.
module tb_unsigned_mac;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, clr = 0, en = 0;
  logic [11:0] p;
  logic [7:0] v [64];
  logic [11:0] out [64];
  longint racc [64];
  unsigned_mac dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(posedge clk); #1; rst_n = 1;
    for (int rep = 0; rep < 10; rep++) begin
      int n;
      clr = 1; @(posedge clk); #1; clr = 0;
      for (int l = 0; l < 64; l++) begin
        racc[l] = 0;
        checks++; if (out[l] != 0) failures++;
      end
      n = (rep == 9) ? 20 : $urandom_range(1, 16);
      for (int i = 0; i < n; i++) begin
        p = (rep == 9) ? 12'd4095 : 12'($urandom_range(0, 4095 / n));
        en = 1'($urandom_range(0, 3) != 0);
        for (int l = 0; l < 64; l++) begin
          v[l] = 8'($urandom);
          if (en) racc[l] += longint'(p) * longint'(v[l]);
        end
        @(posedge clk); #1;
      end
      en = 0;
      for (int l = 0; l < 64; l++) begin
        longint o;
        o = racc[l] >> 8;
        if (o > 4095) o = 4095;
        checks++; if (longint'(out[l]) != o) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
