// digital_core: the digital processor with its memories. For every record
// {query slot qi, masked indices U} taken from the CDC unit it computes the
// exact 8-bit attention of query qi over the kept tokens only:
//   pass 1, for each kept token j (lowest index first): make sure K/V of j
//     is in the K/V buffer (the data overlap detection engine's test; on a
//     miss the selective fetch engine copies it in), score s_j = q.k_j on the
//     signed MAC unit, add exp(s_j) to the softmax sum, keep s_j;
//   pass 2, for each kept token j again: make sure K/V of j is held (it may
//     have been evicted when more tokens are kept than there are slots),
//     p_j = exp(s_j)/sum, accumulate p_j * v_j on the unsigned MAC unit;
//   then the 64 outputs go to slot qi of the output buffer and q_done pulses.
// Tokens held from earlier queries are reused without a fetch. Replacement:
// an invalid slot first, then a slot whose token is not kept by this query,
// else round robin. An empty U writes zeros. Timing: the units form a
// pipeline. A held token is issued every cycle: in pass 1 the signed MAC
// takes q.k_j in one cycle and the softmax sum adds exp(s_j) in the next,
// while the MAC already works on the following token; in pass 2 the softmax
// division and the unsigned MAC accumulate one token per cycle. A miss stalls
// the issue for the fetch (about 20 cycles) plus one lookup cycle. A query
// with m kept tokens, all held, takes 2m + 6 cycles from the record being
// offered to q_done. The pruning-driven reuse, the fetch of kept tokens only and the
// pipelined unit chain follow the chip; the two passes, the sequencing and
// the replacement are this design's choice.
// Host port (clk_d): d_sel selects the key LSB SRAM (32-bit), value SRAM
// (64-bit) or Q buffer (d_addr[4:3] = slot, d_addr[2:0] = word).
module digital_core
  import attn_pkg::*;
#(
  parameter int NS    = N_SLOT,
  parameter int SHIFT = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  // host
  input  logic                d_we,
  input  d_sel_e              d_sel,
  input  logic [8:0]          d_addr,
  input  logic [63:0]         d_wdata,
  input  logic [QI_W-1:0]     ob_rd_q,
  input  logic [5:0]          ob_rd_n,
  output logic [O_W-1:0]      ob_rdata,
  // masked-index records
  output logic                idx_pop,
  input  idx_rec_t            idx_rdata,
  input  logic                idx_empty,
  // CIM K_MSB reads through the CDC unit
  output logic                req_push,
  output logic [CIM_AW-1:0]   req_addr,
  input  logic                req_full,
  output logic                rsp_pop,
  input  logic [31:0]         rsp_data,
  input  logic                rsp_empty,
  // status
  output logic                q_done,
  output logic [QI_W-1:0]     q_done_qi,
  output logic                busy,
  output logic [15:0]         n_fetch,
  output logic [15:0]         n_reuse,
  output logic [15:0]         n_evict,
  output logic [15:0]         n_kept
);
  localparam int SW = $clog2(NS);
  typedef enum logic [3:0] {
    S_IDLE, S_P1_NEXT, S_P1_FETCH, S_P2_NEXT, S_P2_FETCH, S_WRITE
  } state_e;

  state_e            st;
  logic [N_TOK-1:0]  u_r, rem;
  logic [QI_W-1:0]   qi_r;
  logic [TOK_W-1:0]  j, j_mac;
  logic [SW-1:0]     slot_r, victim, rr;
  logic              victim_valid;
  logic signed [7:0] score [N_TOK];

  // units
  logic signed [7:0] q_row [D];
  logic signed [7:0] k_row [D];
  logic [7:0]        v_row [D];
  logic [O_W-1:0]    umac_out [D];
  logic              mac_in, mac_ov;
  logic signed [7:0] mac_s, sm_s;
  logic signed [21:0] mac_acc;
  logic [23:0]       sm_e;
  logic [31:0]       sm_sum;
  logic [P_W-1:0]    sm_p;
  logic              sm_clr, sm_acc, um_clr, um_en;
  logic              lk_hit;
  logic [SW-1:0]     lk_slot;
  logic [NS-1:0]     valid;
  logic [TOK_W-1:0]  tag [NS];
  logic [N_TOK-1:0]  resident, ov_fetch, ov_reuse;
  logic [$clog2(N_TOK):0] ov_nf, ov_nr;
  logic              fe_start, fe_busy, fe_done;
  logic              sram_re;
  logic [SRAM_AW-1:0] sram_addr;
  logic [31:0]       klsb_rdata;
  logic [63:0]       v_rdata;
  logic [SW-1:0]     wr_slot;
  logic              kmsb_we, lsbv_we;
  logic [2:0]        kmsb_beat, lsbv_beat;
  logic [31:0]       kmsb_data;
  logic              set_en, inv_en;

  function automatic logic [TOK_W-1:0] lowest(logic [N_TOK-1:0] v);
    lowest = '0;
    for (int i = N_TOK - 1; i >= 0; i--) if (v[i]) lowest = i[TOK_W-1:0];
  endfunction

  assign j = lowest(rem);

  // victim: first invalid slot, else a slot not kept by this query, else rr
  always_comb begin
    victim       = rr;
    victim_valid = valid[rr];
    for (int s = NS - 1; s >= 0; s--)
      if (valid[s] && !u_r[tag[s]]) begin
        victim       = s[SW-1:0];
        victim_valid = 1'b1;
      end
    for (int s = NS - 1; s >= 0; s--)
      if (!valid[s]) begin
        victim       = s[SW-1:0];
        victim_valid = 1'b0;
      end
  end

  q_buffer u_qbuf (
    .clk, .wr_en(d_we && d_sel == D_QBUF), .wr_q(d_addr[3 +: QI_W]), .wr_word(d_addr[2:0]),
    .wr_data(d_wdata), .rd_q(qi_r), .q_row
  );

  key_lsb_sram u_klsb (
    .clk, .we(d_we && d_sel == D_KLSB), .waddr(d_addr), .wdata(d_wdata[31:0]),
    .re(sram_re), .raddr(sram_addr), .rdata(klsb_rdata)
  );

  value_sram u_val (
    .clk, .we(d_we && d_sel == D_VAL), .waddr(d_addr), .wdata(d_wdata),
    .re(sram_re), .raddr(sram_addr), .rdata(v_rdata)
  );

  overlap_detect #(.N(N_TOK)) u_ovl (
    .u(idx_rdata.u), .resident, .fetch(ov_fetch), .reuse(ov_reuse), .n_fetch(ov_nf), .n_reuse(ov_nr)
  );

  kv_buffer #(.NS(NS)) u_kv (
    .clk, .rst_n, .wr_slot, .kmsb_we, .kmsb_beat, .kmsb_data, .lsbv_we, .lsbv_beat,
    .klsb_data(klsb_rdata), .v_data(v_rdata),
    .set_en, .set_slot(slot_r), .set_tok(j), .inv_en, .inv_slot(victim),
    .rd_slot(lk_slot), .k_row, .v_row, .lk_tok(j), .lk_hit, .lk_slot, .valid, .tag, .resident
  );

  fetch_engine #(.NS(NS)) u_fe (
    .clk, .rst_n, .start(fe_start), .tok(j), .slot(victim), .busy(fe_busy), .done(fe_done),
    .req_push, .req_addr, .req_full, .rsp_pop, .rsp_data, .rsp_empty,
    .sram_re, .sram_addr, .wr_slot, .kmsb_we, .kmsb_beat, .kmsb_data, .lsbv_we, .lsbv_beat
  );

  signed_mac #(.SHIFT(SHIFT)) u_smac (
    .clk, .rst_n, .in_valid(mac_in), .q(q_row), .k(k_row), .out_valid(mac_ov), .s(mac_s), .acc(mac_acc)
  );

  softmax_unit u_sm (
    .clk, .rst_n, .clr(sm_clr), .acc_en(sm_acc), .s(sm_s), .e(sm_e), .sum(sm_sum), .p(sm_p)
  );

  unsigned_mac u_umac (
    .clk, .rst_n, .clr(um_clr), .en(um_en), .p(sm_p), .v(v_row), .out(umac_out)
  );

  output_buffer u_ob (
    .clk, .we(st == S_WRITE), .wq(qi_r), .wdata(umac_out), .rd_q(ob_rd_q), .rd_n(ob_rd_n), .rdata(ob_rdata)
  );

  // control
  always_comb begin
    idx_pop  = (st == S_IDLE) && !idx_empty;
    fe_start = ((st == S_P1_NEXT) || (st == S_P2_NEXT)) && (rem != '0) && !lk_hit;
    inv_en   = fe_start;
    set_en   = ((st == S_P1_FETCH) || (st == S_P2_FETCH)) && fe_done;
    mac_in   = (st == S_P1_NEXT) && (rem != '0) && lk_hit;
    sm_s     = mac_ov ? mac_s : score[j];
    sm_acc   = mac_ov;
    sm_clr   = idx_pop;
    um_clr   = idx_pop;
    um_en    = (st == S_P2_NEXT) && (rem != '0) && lk_hit;
    busy     = (st != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      u_r       <= '0;
      rem       <= '0;
      qi_r      <= '0;
      slot_r    <= '0;
      j_mac     <= '0;
      rr        <= '0;
      q_done    <= 1'b0;
      q_done_qi <= '0;
      n_fetch   <= '0;
      n_reuse   <= '0;
      n_evict   <= '0;
      n_kept    <= '0;
    end else begin
      q_done <= 1'b0;
      if (mac_in) j_mac <= j;
      if (mac_ov) score[j_mac] <= mac_s;
      if (fe_start) begin
        slot_r  <= victim;
        n_fetch <= n_fetch + 16'd1;
        if (victim_valid) n_evict <= n_evict + 16'd1;
        if (victim == rr) rr <= rr + 1'b1;
      end
      unique case (st)
        S_IDLE: if (!idx_empty) begin
          u_r     <= idx_rdata.u;
          rem     <= idx_rdata.u;
          qi_r    <= idx_rdata.qi;
          n_reuse <= n_reuse + 16'(ov_nr);
          n_kept  <= n_kept + 16'(ov_nr) + 16'(ov_nf);
          st      <= S_P1_NEXT;
        end
        // the last MAC result is added to the sum on the cycle pass 2 starts,
        // so pass 2 sees the complete sum
        S_P1_NEXT: begin
          if (rem == '0) begin
            rem <= u_r;
            st  <= S_P2_NEXT;
          end else if (lk_hit) rem[j] <= 1'b0;
          else st <= S_P1_FETCH;
        end
        S_P1_FETCH: if (fe_done) st <= S_P1_NEXT;
        S_P2_NEXT: begin
          if (rem == '0) st <= S_WRITE;
          else if (lk_hit) rem[j] <= 1'b0;
          else st <= S_P2_FETCH;
        end
        S_P2_FETCH: if (fe_done) st <= S_P2_NEXT;
        S_WRITE: begin
          q_done    <= 1'b1;
          q_done_qi <= qi_r;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
