// tb_digital_core: the digital core with models of the CDC FIFOs around it
// (the CIM array's K_MSB bit-planes are served from the testbench's key
// copy). Random 8-bit keys, values and queries are loaded through the host
// port, then index records are sent: a small set, a set that largely
// overlaps it (reuse), a set larger than the 16 K/V slots (eviction and
// refetch), an empty set, and a second round of slots. A set repeated while
// all its tokens are held must finish in 2 cycles per token plus CYC_FIXED
// (the pipelined issue rate). All 64 outputs of every query are compared with a reference written here from the number
// formats alone: s = sat8(q.k >>> 7), e from the two exponent tables built
// with $exp, p = min(4095, e*4096/sum), out = min(4095, sum(p*v) >> 8).
// Reuse, fetch and eviction counters must show each mechanism happened.
module tb_digital_core;
  import attn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0;
  logic d_we = 0;
  d_sel_e d_sel;
  logic [8:0] d_addr;
  logic [63:0] d_wdata;
  logic [1:0] ob_rd_q;
  logic [5:0] ob_rd_n;
  logic [11:0] ob_rdata;
  logic idx_pop, idx_empty, req_push, req_full, rsp_pop, rsp_empty;
  idx_rec_t idx_rdata;
  logic [8:0] req_addr;
  logic [31:0] rsp_data;
  logic q_done, busy;
  logic [1:0] q_done_qi;
  logic [15:0] n_fetch, n_reuse, n_evict, n_kept;

  localparam int CYC_FIXED = 6;
  logic [7:0] K [64][64];
  logic [7:0] V [64][64];
  logic [7:0] Qv [4][64];
  idx_rec_t idx_q [16];
  logic [8:0] rsp_q [64];
  int idx_wp = 0, idx_rp = 0, rsp_wp = 0, rsp_rp = 0;

  digital_core dut (.clk, .rst_n, .d_we, .d_sel, .d_addr, .d_wdata, .ob_rd_q, .ob_rd_n, .ob_rdata,
    .idx_pop, .idx_rdata, .idx_empty, .req_push, .req_addr, .req_full, .rsp_pop, .rsp_data, .rsp_empty,
    .q_done, .q_done_qi, .busy, .n_fetch, .n_reuse, .n_evict, .n_kept);

  function automatic logic [31:0] kmsb_word(logic [8:0] a);
    int row, h, tok, b;
    logic [31:0] w;
    row = int'(a[8:1]); h = int'(a[0]); tok = row / 4; b = row % 4;
    for (int i = 0; i < 32; i++) w[i] = K[tok][32*h + i][4 + b];
    return w;
  endfunction

  assign idx_empty = (idx_wp == idx_rp);
  assign idx_rdata = idx_q[idx_rp % 16];
  assign req_full  = 1'b0;
  assign rsp_empty = (rsp_wp == rsp_rp);
  assign rsp_data  = kmsb_word(rsp_q[rsp_rp % 64]);
  always @(posedge clk) begin
    if (idx_pop) idx_rp <= idx_rp + 1;
    if (req_push) begin rsp_q[rsp_wp % 64] <= req_addr; rsp_wp <= rsp_wp + 1; end
    if (rsp_pop) rsp_rp <= rsp_rp + 1;
  end

  function automatic longint eref(int sv);
    int m, l;
    longint a, b;
    m = sv >>> 4; l = sv & 15;
    a = longint'($rtoi($exp(real'(m)) * 4096.0 + 0.5));
    b = longint'($rtoi($exp(real'(l) / 16.0) * 1024.0 + 0.5));
    return (a * b) >> 10;
  endfunction

  task automatic ref_attn(input int qi, input logic [63:0] u, output int o [64]);
    longint e [64];
    longint sum, acc [64];
    sum = 0;
    for (int n = 0; n < 64; n++) acc[n] = 0;
    for (int j = 0; j < 64; j++) if (u[j]) begin
      int d, s;
      d = 0;
      for (int n = 0; n < 64; n++) d += int'($signed(Qv[qi][n])) * int'($signed(K[j][n]));
      s = d >>> 7;
      if (s > 127) s = 127;
      if (s < -128) s = -128;
      e[j] = eref(s);
      sum += e[j];
    end
    for (int j = 0; j < 64; j++) if (u[j]) begin
      longint p;
      p = (e[j] * 4096) / sum;
      if (p > 4095) p = 4095;
      for (int n = 0; n < 64; n++) acc[n] += p * longint'(V[j][n]);
    end
    for (int n = 0; n < 64; n++) o[n] = (acc[n] >> 8 > 4095) ? 4095 : int'(acc[n] >> 8);
  endtask

  task automatic hw(input d_sel_e sel, input int addr, input logic [63:0] data);
    d_we = 1; d_sel = sel; d_addr = 9'(addr); d_wdata = data;
    @(posedge clk); #1; d_we = 0;
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] us [9];
    int o [64];
    @(posedge clk); #1; rst_n = 1;
    for (int j = 0; j < 64; j++)
      for (int n = 0; n < 64; n++) begin
        K[j][n] = 8'($urandom); V[j][n] = 8'($urandom);
      end
    for (int q = 0; q < 4; q++) for (int n = 0; n < 64; n++) Qv[q][n] = 8'($urandom);
    for (int j = 0; j < 64; j++)
      for (int t = 0; t < 8; t++) begin
        logic [63:0] w, wv;
        w = 0; wv = 0;
        for (int i = 0; i < 8; i++) begin
          w[4*i +: 4] = K[j][8*t + i][3:0];
          wv[8*i +: 8] = V[j][8*t + i];
        end
        hw(D_KLSB, 8*j + t, w);
        hw(D_VAL, 8*j + t, wv);
      end
    for (int q = 0; q < 4; q++)
      for (int w = 0; w < 8; w++) begin
        logic [63:0] wq;
        for (int i = 0; i < 8; i++) wq[8*i +: 8] = Qv[q][8*w + i];
        hw(D_QBUF, 8*q + w, wq);
      end
    us[0] = 64'h0000_0f00_0030_0107;                 // 9 tokens
    us[1] = us[0] | 64'h8000_0000_0000_0000;          // overlaps, 1 new
    us[2] = us[1];                                    // all 10 held: no fetch
    us[3] = 64'h5555_5555_0000_0f0f;                  // 40 tokens: > 16 slots
    us[4] = 64'h0;                                    // all pruned
    us[5] = {$urandom, $urandom} & {$urandom, $urandom};
    us[6] = us[5] ^ 64'h0000_0000_0000_0011;
    us[7] = 64'h1;
    us[8] = 64'hffff_ffff_ffff_ffff;
    for (int r = 0; r < 9; r++) begin
      idx_rec_t rec;
      int cyc;
      rec.qi = 2'(r % 4); rec.u = us[r];
      idx_q[idx_wp % 16] = rec; idx_wp = idx_wp + 1;
      cyc = 0;
      while (!q_done && cyc < 20000) begin @(posedge clk); #1; cyc++; end
      checks++; if (!q_done || q_done_qi !== 2'(r % 4)) failures++;
      // pipelined issue: with every kept token held, one token per cycle in
      // each pass, so 2*10 cycles plus a fixed overhead
      if (r == 2) begin
        $display("held query: %0d cycles", cyc);
        checks++; if (cyc != 2 * 10 + CYC_FIXED) failures++;
      end
      @(posedge clk); #1;
      ref_attn(r % 4, us[r], o);
      ob_rd_q = 2'(r % 4);
      for (int n = 0; n < 64; n++) begin
        ob_rd_n = 6'(n); #1;
        checks++;
        if (int'(ob_rdata) != o[n]) begin
          failures++;
          if (failures < 5) $display("query %0d out[%0d] = %0d, expected %0d", r, n, ob_rdata, o[n]);
        end
      end
      if (r == 1) begin checks++; if (n_reuse < 9) failures++; end
    end
    checks++; if (n_evict == 0) failures++;
    checks++; if (n_fetch <= 40) failures++;
    $display("digital core: fetches=%0d reuses=%0d evictions=%0d kept=%0d", n_fetch, n_reuse, n_evict, n_kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
