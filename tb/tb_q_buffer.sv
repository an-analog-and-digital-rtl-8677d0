// tb_q_buffer: writes random signed elements into all four query slots word
// by word and checks every element of every slot on the read port.
module tb_q_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0;
  logic [1:0] wr_q, rd_q;
  logic [2:0] wr_word;
  logic [63:0] wr_data;
  logic signed [7:0] q_row [64];
  logic [7:0] ref_q [4][64];
  q_buffer dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int q = 0; q < 4; q++)
      for (int w = 0; w < 8; w++) begin
        for (int i = 0; i < 8; i++) begin
          ref_q[q][8*w+i] = 8'($urandom);
          wr_data[8*i +: 8] = ref_q[q][8*w+i];
        end
        wr_en = 1; wr_q = 2'(q); wr_word = 3'(w);
        @(posedge clk); #1;
      end
    wr_en = 0;
    for (int q = 0; q < 4; q++) begin
      rd_q = 2'(q); #1;
      for (int n = 0; n < 64; n++) begin
        checks++; if (q_row[n] !== ref_q[q][n]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
