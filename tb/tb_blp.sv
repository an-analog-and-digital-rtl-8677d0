// tb_blp: drives the 256 RBL inputs of the bitline processor with random
// voltages for each of the four q-bit cycles, runs the control sequence
// (clear; per q bit: refresh, sample, store; then K-BWS for k bits 0..3) and
// checks V_POS and V_NEG of all 64 elements against the binary-weighted sums
//   V_POS - V_NEG = sum over (b, r) of sign(b, r) * 2^(b+r-8) * (VDD - RBL)
// with the sign negative when exactly one of q bit b and k bit r is bit 3,
// and each side on its own.
module tb_blp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  real rbl_v [256];
  logic [1:0] qbit = 0, k_sel = 0;
  logic clr = 0, q_ref = 0, q_sp = 0, q_st = 0, k_st = 0;
  real vpos [64];
  real vneg [64];
  real drop [4][256];
  blp dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic pulse(ref logic sig);
    sig = 1; @(posedge clk); #1; sig = 0;
  endtask

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int i = 0; i < 256; i++) rbl_v[i] = 1.0;
      pulse(clr);
      for (int b = 0; b < 4; b++) begin
        qbit = 2'(b);
        for (int i = 0; i < 256; i++) begin
          drop[b][i] = real'($urandom_range(0, 1000)) / 1000.0;
          rbl_v[i] = 1.0 - drop[b][i];
        end
        pulse(q_ref);
        pulse(q_sp);
        for (int i = 0; i < 256; i++) rbl_v[i] = 1.0;   // RBL moves on, sample is held
        pulse(q_st);
      end
      for (int r = 0; r < 4; r++) begin
        k_sel = 2'(r);
        pulse(k_st);
      end
      for (int j = 0; j < 64; j++) begin
        real ep, en;
        ep = 0.0; en = 0.0;
        for (int b = 0; b < 4; b++)
          for (int r = 0; r < 4; r++) begin
            real w;
            w = drop[b][4*j+r] * (2.0 ** (b + r - 8));
            if ((b == 3) != (r == 3)) en += w; else ep += w;
          end
        checks++;
        if (vpos[j] - ep > 1e-9 || ep - vpos[j] > 1e-9) failures++;
        checks++;
        if (vneg[j] - en > 1e-9 || en - vneg[j] > 1e-9) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
