// tb_attn_top: end-to-end test of the whole accelerator at its default
// sizes (64 keys, 64 elements, 16 K/V slots), with a 10 ns CIM clock and a
// 7 ns digital clock. Random 8-bit keys, values and queries are loaded (key
// MSBs into the CIM array as bit-planes, LSBs into the key LSB SRAM, query
// MSBs into the CIM Q buffer, full queries into the Q buffer). Three batches
// of four queries run:
//   1. SSCS on, threshold just below 0 (keeps q.k >= 0: about half the keys,
//      more than the 16 slots, so tokens are evicted and fetched again);
//   2. SSCS off, threshold 100.5, a token mask, same queries (reuse);
//   3. SSCS off, new queries, threshold -200.5.
// For every query the expected kept set is computed from the 4-bit MSBs
// (q.k >= theta, masked), and the 64 outputs from the exact 8-bit reference
// (see tb_digital_core); both are compared. The test counts how often each
// mechanism occurred and fails if one never did: pruning, keeping, SSCS
// exclusion, masking, fetch, reuse, eviction, CIM operation overlapping a
// standard read, and the CIM core working while the digital core is busy.
module tb_attn_top;
  import attn_pkg::*;
  logic clk_a = 0, clk_d = 0;
  always #5 clk_a = ~clk_a;
  always #3.5 clk_d = ~clk_d;
  int checks = 0, failures = 0;
  logic rst_a_n = 0, rst_d_n = 0;
  logic a_we = 0, d_we = 0, sscs_en = 1, start = 0;
  a_sel_e a_sel;
  d_sel_e d_sel;
  logic [8:0] a_addr, d_addr;
  logic [63:0] a_wdata, d_wdata;
  real vth = 0.0;
  logic [2:0] nq;
  logic a_busy, a_stall, a_sscs_excl, q_done, d_busy;
  logic [63:0] a_u;
  logic [1:0] ob_rd_q, q_done_qi;
  logic [5:0] ob_rd_n;
  logic [11:0] ob_rdata;
  logic [15:0] n_fetch, n_reuse, n_evict, n_kept;

  attn_top dut (.*);

  logic [7:0] K [64][64];
  logic [7:0] V [64][64];
  logic [7:0] Qv [4][64];
  int n_pruned = 0, n_keep = 0, n_sscs = 0, n_masked = 0, n_concurrent = 0, n_overlap = 0;

  always @(posedge clk_a) begin
    if (a_sscs_excl) n_sscs++;
    if (dut.arr_re && (dut.u_analog.ctl.prech || dut.u_analog.ctl.mult || dut.u_analog.ctl.acc)) n_concurrent++;
    if (a_busy && d_busy) n_overlap++;
  end

  function automatic int msb(logic [7:0] x);
    return int'($signed(x[7:4]));
  endfunction

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

  task automatic aw(input a_sel_e sel, input int addr, input logic [63:0] data);
    a_we = 1; a_sel = sel; a_addr = 9'(addr); a_wdata = data;
    @(posedge clk_a); #1; a_we = 0;
  endtask

  task automatic dw(input d_sel_e sel, input int addr, input logic [63:0] data);
    d_we = 1; d_sel = sel; d_addr = 9'(addr); d_wdata = data;
    @(posedge clk_d); #1; d_we = 0;
  endtask

  task automatic load_queries(input int zero_pct);
    for (int q = 0; q < 4; q++)
      for (int n = 0; n < 64; n++)
        Qv[q][n] = ($urandom_range(0, 99) < zero_pct) ? 8'($urandom_range(0, 15)) : 8'($urandom);
    for (int q = 0; q < 4; q++) begin
      for (int w = 0; w < 4; w++) begin
        logic [63:0] d;
        for (int i = 0; i < 16; i++) d[4*i +: 4] = Qv[q][16*w + i][7:4];
        aw(A_QMSB, 4*q + w, d);
      end
      for (int w = 0; w < 8; w++) begin
        logic [63:0] d;
        for (int i = 0; i < 8; i++) d[8*i +: 8] = Qv[q][8*w + i];
        dw(D_QBUF, 8*q + w, d);
      end
    end
  endtask

  task automatic run_batch(input real theta, input logic s, input logic [63:0] mask);
    logic [63:0] uref [4];
    int done_n, cyc;
    int o [64];
    sscs_en = s;
    // one V_Th for the whole batch: with SSCS the scale is 1/(256 n), n the
    // non-zero elements of each query; theta is chosen so that every n maps
    // it between the same two integers
    vth = theta / (256.0 * 64.0);
    aw(A_MASK, 0, mask);
    for (int q = 0; q < 4; q++)
      for (int j = 0; j < 64; j++) begin
        int d;
        d = 0;
        for (int n = 0; n < 64; n++) d += msb(Qv[q][n]) * msb(K[j][n]);
        uref[q][j] = (real'(d) >= theta) && mask[j];
        if (real'(d) < theta) n_pruned++; else n_keep++;
        if (real'(d) >= theta && !mask[j]) n_masked++;
      end
    nq = 4; start = 1; @(posedge clk_a); #1; start = 0;
    done_n = 0; cyc = 0;
    while (done_n < 4 && cyc < 200000) begin
      @(posedge clk_d); #1; cyc++;
      if (q_done) begin
        checks++; if (int'(q_done_qi) != done_n) failures++;
        done_n++;
      end
    end
    checks++; if (done_n != 4) failures++;
    for (int q = 0; q < 4; q++) begin
      ref_attn(q, uref[q], o);
      ob_rd_q = 2'(q);
      for (int n = 0; n < 64; n++) begin
        ob_rd_n = 6'(n); #1;
        checks++;
        if (int'(ob_rdata) != o[n]) begin
          failures++;
          if (failures < 5) $display("q%0d out[%0d] = %0d, expected %0d", q, n, ob_rdata, o[n]);
        end
      end
    end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int kept_before;
    repeat (3) @(posedge clk_a); #1; rst_a_n = 1; rst_d_n = 1;
    @(posedge clk_a); #1;
    for (int j = 0; j < 64; j++)
      for (int n = 0; n < 64; n++) begin K[j][n] = 8'($urandom); V[j][n] = 8'($urandom); end
    for (int j = 0; j < 64; j++)
      for (int b = 0; b < 4; b++)
        for (int h = 0; h < 2; h++) begin
          logic [63:0] d;
          d = '0;
          for (int i = 0; i < 32; i++) d[i] = K[j][32*h + i][4 + b];
          aw(A_KEY, 8*j + 2*b + h, d);
        end
    for (int j = 0; j < 64; j++)
      for (int t = 0; t < 8; t++) begin
        logic [63:0] w, wv;
        w = 0;
        for (int i = 0; i < 8; i++) begin
          w[4*i +: 4] = K[j][8*t + i][3:0];
          wv[8*i +: 8] = V[j][8*t + i];
        end
        dw(D_KLSB, 8*j + t, w);
        dw(D_VAL, 8*j + t, wv);
      end
    load_queries(50);
    run_batch(-0.5, 1'b1, '1);
    run_batch(100.5, 1'b0, {$urandom, $urandom} | 64'hff);
    load_queries(25);
    kept_before = int'(n_kept);
    run_batch(-200.5, 1'b0, '1);
    $display("mechanisms: pruned=%0d kept=%0d sscs_cycles=%0d masked=%0d fetches=%0d reuses=%0d evictions=%0d cim+read=%0d analog/digital overlap=%0d",
             n_pruned, n_keep, n_sscs, n_masked, n_fetch, n_reuse, n_evict, n_concurrent, n_overlap);
    checks++; if (n_pruned == 0) failures++;
    checks++; if (n_keep == 0) failures++;
    checks++; if (n_sscs == 0) failures++;
    checks++; if (n_masked == 0) failures++;
    checks++; if (n_fetch == 0) failures++;
    checks++; if (n_reuse == 0) failures++;
    checks++; if (n_evict == 0) failures++;
    checks++; if (n_concurrent == 0) failures++;
    checks++; if (n_overlap == 0) failures++;
    checks++; if (int'(n_kept) == kept_before) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
