// tb_analog_core: loads 64 random signed 4-bit keys into the CIM array as
// bit-planes and four queries with 25/50/75/0 % zero elements into the CIM Q
// buffer, then runs single-query batches with SSCS on and off and with
// several thresholds. Each pushed index vector
// is compared with the exact rule: keep key j when q.k_j >= theta, theta
// being set half-way between integers so there are no ties. V_Th is theta
// scaled like the BLP output: theta / (256 * n), n the columns sharing charge
// (non-zero query elements with SSCS, 64 without). Also checks the mask, the
// 28-cycle query time and that standard reads return the stored bit-planes
// while a CIM operation runs.
module tb_analog_core;
  import attn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0;
  logic a_we = 0;
  a_sel_e a_sel;
  logic [8:0] a_addr;
  logic [63:0] a_wdata;
  logic sscs_en = 1, start = 0;
  real vth = 0.0;
  logic [2:0] nq;
  logic idx_push, idx_full = 0, arr_re = 0;
  idx_rec_t idx_wdata;
  logic [8:0] arr_addr;
  logic [31:0] arr_rdata;
  logic busy, stall, sscs_excl;
  logic [63:0] u, q_zero;
  int kq [64][64];
  int qq [4][64];
  int n_sscs = 0;

  analog_core dut (.clk_a(clk), .rst_a_n(rst_n), .a_we, .a_sel, .a_addr, .a_wdata, .sscs_en, .vth,
    .start, .nq, .idx_push, .idx_wdata, .idx_full, .arr_re, .arr_addr, .arr_rdata,
    .busy, .stall, .u, .q_zero, .sscs_excl);

  always @(posedge clk) if (sscs_excl) n_sscs++;

  task automatic aw(input a_sel_e sel, input int addr, input logic [63:0] data);
    a_we = 1; a_sel = sel; a_addr = 9'(addr); a_wdata = data;
    @(posedge clk); #1; a_we = 0;
  endtask

  function automatic int dot(int qi, int j);
    int d = 0;
    for (int n = 0; n < 64; n++) d += qq[qi][n] * kq[j][n];
    return d;
  endfunction

  function automatic int nact(int qi, logic s);
    int c = 0;
    if (!s) return 64;
    for (int n = 0; n < 64; n++) if (qq[qi][n] != 0) c++;
    return c;
  endfunction

  // run nq=1 on slot qi, return the pushed vector and the cycle count
  task automatic run1(input int qi, input real theta, input logic s, output logic [63:0] got, output int cyc);
    sscs_en = s;
    vth = theta / (256.0 * real'(nact(qi, s)));
    // the control unit always starts at slot 0, so copy slot qi into slot 0
    for (int w = 0; w < 4; w++) begin
      logic [63:0] d;
      for (int i = 0; i < 16; i++) d[4*i +: 4] = 4'(qq[qi][16*w + i]);
      aw(A_QMSB, w, d);
    end
    nq = 1; start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!idx_push && cyc < 200) begin @(posedge clk); #1; cyc++; end
    got = idx_wdata.u;
    @(posedge clk); #1;
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] got, mask, expv;
    int cyc;
    real th [4] = '{-0.5, 100.5, -150.5, 300.5};
    @(posedge clk); #1; rst_n = 1;
    for (int j = 0; j < 64; j++) for (int n = 0; n < 64; n++) kq[j][n] = $urandom_range(0, 15) - 8;
    for (int q = 0; q < 4; q++)
      for (int n = 0; n < 64; n++) begin
        int z;
        z = (q == 3) ? 0 : (q + 1) * 25;
        qq[q][n] = ($urandom_range(0, 99) < z) ? 0 : (($urandom_range(0, 1) == 1) ? $urandom_range(1, 7) : -$urandom_range(1, 8));
      end
    for (int j = 0; j < 64; j++)
      for (int b = 0; b < 4; b++)
        for (int h = 0; h < 2; h++) begin
          logic [63:0] d;
          d = '0;
          for (int i = 0; i < 32; i++) d[i] = kq[j][32*h + i][b];
          aw(A_KEY, {(4*j + b), 1'(h)}, d);
        end
    // single-query runs
    for (int q = 0; q < 4; q++)
      for (int t = 0; t < 4; t++)
        for (int s = 0; s < 2; s++) begin
          run1(q, th[t], 1'(s), got, cyc);
          for (int j = 0; j < 64; j++) expv[j] = (real'(dot(q, j)) >= th[t]);
          checks++;
          if (got !== expv) begin
            failures++;
            $display("q%0d th=%f sscs=%0d got %h exp %h", q, th[t], s, got, expv);
          end
          checks++; if (cyc != 28) failures++;
        end
    // mask
    mask = {$urandom, $urandom};
    aw(A_MASK, 0, mask);
    run1(1, -0.5, 1'b1, got, cyc);
    for (int j = 0; j < 64; j++) expv[j] = (dot(1, j) >= 0) && mask[j];
    checks++; if (got !== expv) failures++;
    aw(A_MASK, 0, '1);
    // standard reads during a CIM run
    sscs_en = 1; nq = 1; start = 1; @(posedge clk); #1; start = 0;
    for (int t = 0; t < 20; t++) begin
      int j, b, h;
      j = $urandom_range(0, 63); b = $urandom_range(0, 3); h = $urandom_range(0, 1);
      arr_re = 1; arr_addr = {8'(4*j + b), 1'(h)};
      @(posedge clk); #1; arr_re = 0;
      for (int i = 0; i < 32; i++) expv[i] = kq[j][32*h + i][b];
      checks++; if (arr_rdata !== expv[31:0]) failures++;
    end
    while (busy) @(posedge clk);
    #1;
    checks++; if (n_sscs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
