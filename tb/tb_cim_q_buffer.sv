// tb_cim_q_buffer: fills all four query slots of the CIM Q buffer with random
// 4-bit elements (some forced to zero), then checks every RWL bit-plane with
// the RWLs enabled and disabled and every zero flag against a copy kept in
// the testbench.
module tb_cim_q_buffer;
  import attn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rwl_en = 0;
  logic [1:0] wr_q, wr_word, rd_q, qbit;
  logic [63:0] wr_data;
  logic [63:0] rwl, q_zero;
  logic [3:0] ref_q [4][64];

  cim_q_buffer dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int q = 0; q < 4; q++)
      for (int w = 0; w < 4; w++) begin
        for (int i = 0; i < 16; i++) begin
          ref_q[q][16*w+i] = ($urandom_range(0, 3) == 0) ? 4'd0 : 4'($urandom);
          wr_data[4*i +: 4] = ref_q[q][16*w+i];
        end
        wr_q = 2'(q); wr_word = 2'(w); wr_en = 1;
        @(posedge clk); #1;
      end
    wr_en = 0;
    for (int q = 0; q < 4; q++)
      for (int b = 0; b < 4; b++)
        for (int en = 0; en < 2; en++) begin
          rd_q = 2'(q); qbit = 2'(b); rwl_en = en[0];
          #1;
          for (int n = 0; n < 64; n++) begin
            checks++;
            if (rwl[n] !== (en[0] & ref_q[q][n][b])) failures++;
            checks++;
            if (q_zero[n] !== (ref_q[q][n] == 0)) failures++;
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
