// tb_fig5_pruning_map: reproduces the pruning decision map used to
// characterise the CIM comparator. Eight keys hold one value each (7, 5, 3,
// 1, -1, -3, -5, -7 in all 64 elements); a query holds one of the same eight
// values in 48 elements and zeros in the other 16 (25 % sparsity), or in 16
// elements and zeros in 48 (75 % sparsity). With threshold 0 each key must be
// kept exactly when q.k > 0. The score recovered from the BLP output,
// (V_POS - V_NEG) * 256 * n, must equal 48*q*k or 16*q*k, with and without
// SSCS; cells of the map (2352, 1680, 1008, 336 at 25 %; 784, 560, 112 at
// 75 %) are checked by value. With SSCS the analog difference must grow by
// 64/n over the run without SSCS.
module tb_fig5_pruning_map;
  import attn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, a_we = 0, sscs_en = 0, start = 0;
  a_sel_e a_sel;
  logic [8:0] a_addr;
  logic [63:0] a_wdata;
  real vth = 0.0;
  logic [2:0] nq = 3'd1;
  logic idx_push, idx_full = 0, arr_re = 0;
  idx_rec_t idx_wdata;
  logic [8:0] arr_addr = '0;
  logic [31:0] arr_rdata;
  logic busy, stall, sscs_excl;
  logic [63:0] u, q_zero;
  int vals [8] = '{7, 5, 3, 1, -1, -3, -5, -7};

  analog_core dut (.clk_a(clk), .rst_a_n(rst_n), .a_we, .a_sel, .a_addr, .a_wdata, .sscs_en, .vth,
    .start, .nq, .idx_push, .idx_wdata, .idx_full, .arr_re, .arr_addr, .arr_rdata,
    .busy, .stall, .u, .q_zero, .sscs_excl);

  task automatic aw(input a_sel_e sel, input int addr, input logic [63:0] data);
    a_we = 1; a_sel = sel; a_addr = 9'(addr); a_wdata = data;
    @(posedge clk); #1; a_we = 0;
  endtask

  function automatic bit printed_ok(int nz, int prod);
    // cells printed in the map, as magnitudes
    if (nz == 48) return prod == 2352 || prod == 1680 || prod == 1008 || prod == 336 ||
                         prod == 1200 || prod == 720 || prod == 432 || prod == 240 ||
                         prod == 144 || prod == 48;
    return prod == 784 || prod == 560 || prod == 336 || prod == 112 || prod == 400 ||
           prod == 240 || prod == 80 || prod == 144 || prod == 48 || prod == 16;
  endfunction

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real diff_nosscs [8];
    @(posedge clk); #1; rst_n = 1;
    // keys 0..7 hold vals[j] in every element, keys 8..63 hold zero
    for (int j = 0; j < 64; j++)
      for (int b = 0; b < 4; b++)
        for (int h = 0; h < 2; h++) begin
          logic [3:0] kv;
          kv = (j < 8) ? 4'(vals[j]) : 4'd0;
          aw(A_KEY, 8*j + 2*b + h, kv[b] ? 64'hffff_ffff : 64'h0);
        end
    for (int sp = 0; sp < 2; sp++) begin
      int nz;
      nz = (sp == 0) ? 48 : 16;
      for (int qi = 0; qi < 8; qi++) begin
        for (int w = 0; w < 4; w++) begin
          logic [63:0] d;
          for (int i = 0; i < 16; i++) d[4*i +: 4] = (16*w + i < nz) ? 4'(vals[qi]) : 4'd0;
          aw(A_QMSB, w, d);
        end
        for (int s = 0; s < 2; s++) begin
          int n;
          sscs_en = 1'(s);
          n = s ? nz : 64;
          start = 1; @(posedge clk); #1; start = 0;
          while (!idx_push) @(posedge clk);
          #1;
          for (int j = 0; j < 8; j++) begin
            int prod, got;
            real diff;
            prod = nz * vals[qi] * vals[j];
            diff = dut.vpos[j] - dut.vneg[j];
            got = $rtoi(diff * 256.0 * real'(n) + ((diff >= 0) ? 0.5 : -0.5));
            checks++; if (got != prod) failures++;
            checks++; if (!printed_ok(nz, (prod < 0) ? -prod : prod)) failures++;
            checks++; if (idx_wdata.u[j] !== (prod > 0)) failures++;
            if (s == 0) diff_nosscs[j] = diff;
            else begin
              real ratio;
              ratio = diff / diff_nosscs[j];
              checks++;
              if (ratio > 64.0 / nz + 1e-6 || ratio < 64.0 / nz - 1e-6) failures++;
            end
          end
          @(posedge clk); #1;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
