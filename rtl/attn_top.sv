// attn_top: the hybrid analog/digital attention accelerator. The analog CIM
// core scores every query against all 64 keys with 4-bit MSBs in the charge
// domain and keeps only the keys whose approximate score reaches the
// threshold; the digital core computes exact 8-bit attention (score,
// softmax, P x V) for the kept keys only, fetching their K/V vectors only
// when they are not already held from an earlier query. The two sides run
// on their own clocks (clk_a, clk_d) and meet only in the CDC unit, so the
// CIM core scores query i+1 while the digital core works on query i.
// Use: load keys (MSBs into the CIM array as bit-planes, LSBs into the key
// LSB SRAM), values, queries (MSBs into the CIM Q buffer, full values into
// the Q buffer) and optionally the token mask; set vth and sscs_en; pulse
// start with nq (1..4) on clk_a; wait for nq q_done pulses on clk_d; read
// the 64 x 12-bit outputs from the output buffer. Status counters report
// fetches, reuses, evictions and kept tokens. Contains behavioural models
// of the analog parts (real-valued nets).
module attn_top
  import attn_pkg::*;
#(
  parameter int  NS  = N_SLOT,
  parameter real VDD = 1.0
) (
  input  logic              clk_a,
  input  logic              rst_a_n,
  input  logic              clk_d,
  input  logic              rst_d_n,
  // CIM-side host port and control (clk_a)
  input  logic              a_we,
  input  a_sel_e            a_sel,
  input  logic [8:0]        a_addr,
  input  logic [63:0]       a_wdata,
  input  logic              sscs_en,
  input  real               vth,
  input  logic              start,
  input  logic [QI_W:0]     nq,
  output logic              a_busy,
  output logic              a_stall,
  output logic [N_TOK-1:0]  a_u,
  output logic              a_sscs_excl,
  // digital-side host port (clk_d)
  input  logic              d_we,
  input  d_sel_e            d_sel,
  input  logic [8:0]        d_addr,
  input  logic [63:0]       d_wdata,
  input  logic [QI_W-1:0]   ob_rd_q,
  input  logic [5:0]        ob_rd_n,
  output logic [O_W-1:0]    ob_rdata,
  output logic              q_done,
  output logic [QI_W-1:0]   q_done_qi,
  output logic              d_busy,
  output logic [15:0]       n_fetch,
  output logic [15:0]       n_reuse,
  output logic [15:0]       n_evict,
  output logic [15:0]       n_kept
);
  logic              idx_push, idx_full, idx_pop, idx_empty;
  idx_rec_t          idx_wdata, idx_rdata;
  logic              req_push, req_full, rsp_pop, rsp_empty;
  logic [CIM_AW-1:0] req_addr, arr_addr;
  logic [31:0]       rsp_data, arr_rdata;
  logic              arr_re;
  logic [N_TOK-1:0]  q_zero;

  analog_core #(.VDD(VDD)) u_analog (
    .clk_a, .rst_a_n, .a_we, .a_sel, .a_addr, .a_wdata, .sscs_en, .vth, .start, .nq,
    .idx_push, .idx_wdata, .idx_full, .arr_re, .arr_addr, .arr_rdata,
    .busy(a_busy), .stall(a_stall), .u(a_u), .q_zero, .sscs_excl(a_sscs_excl)
  );

  cdc_unit u_cdc (
    .clk_a, .rst_a_n, .clk_d, .rst_d_n,
    .idx_push, .idx_wdata, .idx_full, .idx_pop, .idx_rdata, .idx_empty,
    .req_push, .req_addr, .req_full, .rsp_pop, .rsp_data, .rsp_empty,
    .arr_re, .arr_addr, .arr_rdata
  );

  digital_core #(.NS(NS)) u_digital (
    .clk(clk_d), .rst_n(rst_d_n), .d_we, .d_sel, .d_addr, .d_wdata, .ob_rd_q, .ob_rd_n, .ob_rdata,
    .idx_pop, .idx_rdata, .idx_empty, .req_push, .req_addr, .req_full, .rsp_pop, .rsp_data, .rsp_empty,
    .q_done, .q_done_qi, .busy(d_busy), .n_fetch, .n_reuse, .n_evict, .n_kept
  );
endmodule
