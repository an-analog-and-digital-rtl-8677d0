// analog_core: the analog CIM side of the accelerator (behavioural, since it
// contains the analog array, BLP and comparator models). For each query of a
// batch it computes the approximate 4-bit x 4-bit scores q.k for all 64 keys
// in the charge domain, compares them with the threshold voltage vth and
// pushes the 64-bit vector of kept keys, gated by the mask buffer, to the CDC
// unit as {query slot, indices}.
// Host port (clk_a): a_sel selects the key array (a_addr = {row, half},
// 32-bit data), the CIM Q buffer (a_addr[3:2] = slot, a_addr[1:0] = word of
// 16 x 4-bit elements) or the mask (64-bit). Keys are not to be written while
// busy. start/nq begin a batch of nq queries. The standard-read port serves
// the CDC unit in parallel with the CIM operation. Timing: 28 cycles per
// query (see analog_ctrl). TG_in is high in precharge and accumulate and low
// in multiply, as in the chip's CIM timing diagram.
module analog_core
  import attn_pkg::*;
#(
  parameter real VDD = 1.0
) (
  input  logic              clk_a,
  input  logic              rst_a_n,
  input  logic              a_we,
  input  a_sel_e            a_sel,
  input  logic [8:0]        a_addr,
  input  logic [63:0]       a_wdata,
  input  logic              sscs_en,
  input  real               vth,
  input  logic              start,
  input  logic [QI_W:0]     nq,
  output logic              idx_push,
  output idx_rec_t          idx_wdata,
  input  logic              idx_full,
  input  logic              arr_re,
  input  logic [CIM_AW-1:0] arr_addr,
  output logic [31:0]       arr_rdata,
  output logic              busy,
  output logic              stall,
  output logic [N_TOK-1:0]  u,
  output logic [N_TOK-1:0]  q_zero,
  output logic              sscs_excl
);
  actl_t             ctl;
  logic [D-1:0]      rwl, tg_ctrl;
  logic [N_TOK-1:0]  u_cmp, mask, masked;
  logic [$clog2(N_TOK):0] n_kept;
  real               rbl_v [ROWS];
  real               vpos [N_TOK];
  real               vneg [N_TOK];

  wire key_we = a_we && (a_sel == A_KEY);

  analog_ctrl u_ctrl (
    .clk(clk_a), .rst_n(rst_a_n), .start, .nq, .out_full(idx_full),
    .ctl, .push(idx_push), .stall, .busy
  );

  cim_q_buffer u_qbuf (
    .clk(clk_a), .wr_en(a_we && (a_sel == A_QMSB)), .wr_q(a_addr[2 +: QI_W]),
    .wr_word(a_addr[1:0]), .wr_data(a_wdata), .rd_q(ctl.qsel), .qbit(ctl.qbit),
    .rwl_en(ctl.mult), .rwl, .q_zero
  );

  sscs_engine #(.DD(D)) u_sscs (
    .tg_in(ctl.prech | ctl.acc), .prech(ctl.prech), .sscs_en, .q_zero, .tg_ctrl
  );

  cim_array #(.VDD(VDD)) u_array (
    .clk(clk_a), .we(key_we), .re(arr_re), .addr(key_we ? a_addr : arr_addr),
    .wdata(a_wdata[31:0]), .rdata(arr_rdata),
    .prech(ctl.prech), .mult(ctl.mult), .acc(ctl.acc), .rwl, .tg_ctrl, .rbl_v
  );

  blp #(.VDD(VDD)) u_blp (
    .clk(clk_a), .rbl_v, .qbit(ctl.qbit), .clr(ctl.pe_clr), .q_ref(ctl.prech),
    .q_sp(ctl.q_sp), .q_st(ctl.q_st), .k_st(ctl.k_st), .k_sel(ctl.k_sel), .vpos, .vneg
  );

  comparator_bank #(.N(N_TOK)) u_comp (
    .clk(clk_a), .en(ctl.comp), .vpos, .vneg, .vth, .u(u_cmp)
  );

  pruning_idx_buffer #(.N(N_TOK)) u_pib (
    .clk(clk_a), .rst_n(rst_a_n), .cap(ctl.cap), .u_in(u_cmp), .u, .n_kept
  );

  mask_buffer #(.N(N_TOK)) u_mask (
    .clk(clk_a), .rst_n(rst_a_n), .wr_en(a_we && (a_sel == A_MASK)), .wr_data(a_wdata),
    .u, .mask, .masked
  );

  assign idx_wdata.qi = ctl.qsel;
  assign idx_wdata.u  = masked;
  assign sscs_excl    = ctl.acc && sscs_en && (|q_zero);
endmodule
