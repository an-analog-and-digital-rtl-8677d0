// tb_kv_buffer: fills every slot with a random 8-bit key and value through
// the three beat streams (K MSB bit-plane halves, K LSB nibbles, V bytes),
// tags them with distinct tokens, and checks the reassembled rows of every
// slot, the token lookup, the resident set, invalidation and re-tagging.
module tb_kv_buffer;
  import attn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0;
  logic [3:0] wr_slot, set_slot, inv_slot, rd_slot, lk_slot;
  logic kmsb_we = 0, lsbv_we = 0, set_en = 0, inv_en = 0, lk_hit;
  logic [2:0] kmsb_beat, lsbv_beat;
  logic [31:0] kmsb_data, klsb_data;
  logic [63:0] v_data;
  logic [5:0] set_tok, lk_tok;
  logic signed [7:0] k_row [64];
  logic [7:0] v_row [64];
  logic [15:0] valid;
  logic [5:0] tag [16];
  logic [63:0] resident;
  logic [7:0] rk [16][64];
  logic [7:0] rv [16][64];
  kv_buffer dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); #1; rst_n = 1;
    checks++; if (valid !== 0 || resident !== 0) failures++;
    for (int s = 0; s < 16; s++) begin
      for (int n = 0; n < 64; n++) begin rk[s][n] = 8'($urandom); rv[s][n] = 8'($urandom); end
      wr_slot = 4'(s);
      for (int t = 0; t < 8; t++) begin
        kmsb_we = 1; kmsb_beat = 3'(t);
        for (int i = 0; i < 32; i++) kmsb_data[i] = rk[s][32 * (t % 2) + i][4 + t / 2];
        lsbv_we = 1; lsbv_beat = 3'(t);
        for (int i = 0; i < 8; i++) begin
          klsb_data[4*i +: 4] = rk[s][8*t + i][3:0];
          v_data[8*i +: 8] = rv[s][8*t + i];
        end
        @(posedge clk); #1;
      end
      kmsb_we = 0; lsbv_we = 0;
      set_en = 1; set_slot = 4'(s); set_tok = 6'(4 * s + 1);
      @(posedge clk); #1; set_en = 0;
    end
    for (int s = 0; s < 16; s++) begin
      rd_slot = 4'(s); lk_tok = 6'(4 * s + 1); #1;
      for (int n = 0; n < 64; n++) begin
        checks++; if (k_row[n] !== rk[s][n] || v_row[n] !== rv[s][n]) failures++;
      end
      checks++; if (!lk_hit || lk_slot !== 4'(s)) failures++;
      lk_tok = 6'(4 * s + 2); #1;
      checks++; if (lk_hit) failures++;
    end
    for (int j = 0; j < 64; j++) begin
      checks++; if (resident[j] !== (j % 4 == 1 && j < 64)) failures++;
    end
    inv_en = 1; inv_slot = 4'd5; @(posedge clk); #1; inv_en = 0;
    lk_tok = 6'(21); #1;
    checks++; if (lk_hit || resident[21] || valid[5]) failures++;
    set_en = 1; set_slot = 4'd5; set_tok = 6'd62; @(posedge clk); #1; set_en = 0;
    lk_tok = 6'd62; #1;
    checks++; if (!lk_hit || lk_slot !== 4'd5 || !resident[62]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
