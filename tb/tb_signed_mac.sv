// tb_signed_mac: random signed vectors, including all -128 and all +127
// cases that saturate; checks the full dot product, the saturated score
// (dot >>> 7) and the one-cycle latency of out_valid.
module tb_signed_mac;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] q [64];
  logic signed [7:0] k [64];
  logic signed [7:0] s;
  logic signed [21:0] acc;
  signed_mac dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(posedge clk); #1; rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int d, sh, se;
      for (int n = 0; n < 64; n++) begin
        q[n] = 8'($urandom);
        k[n] = (t < 2) ? ((t == 0) ? q[n] : -q[n]) : 8'($urandom);
        if (t == 2) begin q[n] = -128; k[n] = -128; end
        if (t > 100) q[n] = 8'($signed(q[n]) >>> 3);
      end
      d = 0;
      for (int n = 0; n < 64; n++) d += int'(q[n]) * int'(k[n]);
      sh = d >>> 7;
      se = (sh > 127) ? 127 : (sh < -128) ? -128 : sh;
      in_valid = 1; @(posedge clk); #1; in_valid = 0;
      checks++; if (!out_valid) failures++;
      checks++; if (int'(acc) != d) failures++;
      checks++; if (int'(s) != se) failures++;
      @(posedge clk); #1;
      checks++; if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
