// tb_softmax_unit: checks the exponent for all 256 scores against
// floor(round(e^m * 2^12) * round(e^(l/16) * 2^10) / 2^10) computed here with
// $exp, and that it is within 0.5% (or 2 LSB) of e^(s/16) * 2^12. Then
// accumulates random score sets and checks the sum and every probability
// p = min(4095, floor(e * 4096 / sum)), and p = 0 after clearing.
module tb_softmax_unit;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, clr = 0, acc_en = 0;
  logic signed [7:0] s;
  logic [23:0] e;
  logic [31:0] sum;
  logic [11:0] p;
  softmax_unit dut (.*);

  function automatic longint eref(int sv);
    int m, l;
    longint a, b;
    m = sv >>> 4; l = sv & 15;
    a = longint'($rtoi($exp(real'(m)) * 4096.0 + 0.5));
    b = longint'($rtoi($exp(real'(l) / 16.0) * 1024.0 + 0.5));
    return (a * b) >> 10;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sv [20];
    longint tot;
    @(posedge clk); #1; rst_n = 1;
    for (int v = -128; v < 128; v++) begin
      real ideal;
      s = 8'(v); #1;
      checks++; if (longint'(e) != eref(v)) failures++;
      ideal = $exp(real'(v) / 16.0) * 4096.0;
      checks++;
      if (real'(e) > ideal * 1.005 + 2.0 || real'(e) < ideal * 0.995 - 2.0) failures++;
    end
    for (int rep = 0; rep < 20; rep++) begin
      int n;
      n = $urandom_range(1, 20);
      clr = 1; @(posedge clk); #1; clr = 0;
      checks++; if (sum != 0 || p != 0) failures++;
      tot = 0;
      for (int i = 0; i < n; i++) begin
        sv[i] = $urandom_range(0, 255) - 128;
        if (rep % 2 == 0) sv[i] = sv[i] / 4;
        s = 8'(sv[i]); acc_en = 1; tot += eref(sv[i]);
        @(posedge clk); #1;
      end
      acc_en = 0;
      checks++; if (longint'(sum) != tot) failures++;
      for (int i = 0; i < n; i++) begin
        longint pe;
        s = 8'(sv[i]); #1;
        pe = (eref(sv[i]) * 4096) / tot;
        if (pe > 4095) pe = 4095;
        checks++; if (longint'(p) != pe) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
