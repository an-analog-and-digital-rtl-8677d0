// analog_ctrl: the analog processor control unit. It runs the CIM pruning
// pass for a batch of nq queries (slots 0..nq-1), one query after the other:
//   CLR   clear the BLP storage capacitors                      1 cycle
//   for q bit b = 0 (LSB) .. 3 (MSB):
//     PRE  precharge array and RBLs, refresh Q-BWS C_SP        1 cycle
//     MUL  drive q bit-plane b on the RWLs                     1 cycle
//     ACC  charge sharing along each row (TG on)               1 cycle
//     SP   Q-BWS samples the RBL drops                         1 cycle
//     ST   Q-BWS shares the sample with C_ST                   1 cycle
//   KST  K-BWS samples V_o[0..3], LSB first                    4 cycles
//   CMP  comparators latch                                     1 cycle
//   CAP  pruning index buffer captures U                       1 cycle
//   PUSH masked indices pushed to the CDC unit; waits (stall)  >=1 cycle
//        while that FIFO is full
// so a query takes 28 cycles when not stalled. The next query starts right
// after PUSH, which lets the CIM work on q(i+1) while the digital core
// handles q(i). The bit order, the phases and the K-BWS order follow the
// chip; the one-cycle-per-step schedule is this design's choice.
module analog_ctrl
  import attn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [QI_W:0]    nq,
  input  logic             out_full,
  output actl_t            ctl,
  output logic             push,
  output logic             stall,
  output logic             busy
);
  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_PRE, S_MUL, S_ACC, S_SP, S_ST, S_KST, S_CMP, S_CAP, S_PUSH
  } state_e;

  state_e          st;
  logic [1:0]      cnt;
  logic [QI_W-1:0] qsel;
  logic [QI_W:0]   nq_r;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      cnt  <= '0;
      qsel <= '0;
      nq_r <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start && nq != 0) begin
          st   <= S_CLR;
          qsel <= '0;
          nq_r <= nq;
        end
        S_CLR:  begin st <= S_PRE; cnt <= '0; end
        S_PRE:  st <= S_MUL;
        S_MUL:  st <= S_ACC;
        S_ACC:  st <= S_SP;
        S_SP:   st <= S_ST;
        S_ST:   begin
          cnt <= cnt + 2'd1;
          st  <= (cnt == 2'd3) ? S_KST : S_PRE;
        end
        S_KST:  begin
          cnt <= cnt + 2'd1;
          if (cnt == 2'd3) st <= S_CMP;
        end
        S_CMP:  st <= S_CAP;
        S_CAP:  st <= S_PUSH;
        S_PUSH: if (!out_full) begin
          if ({1'b0, qsel} == nq_r - 1'b1) st <= S_IDLE;
          else begin
            qsel <= qsel + 1'b1;
            st   <= S_CLR;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    ctl        = '0;
    ctl.qsel   = qsel;
    ctl.qbit   = cnt;
    ctl.k_sel  = cnt;
    ctl.pe_clr = (st == S_CLR);
    ctl.prech  = (st == S_PRE);
    ctl.mult   = (st == S_MUL);
    ctl.acc    = (st == S_ACC);
    ctl.q_sp   = (st == S_SP);
    ctl.q_st   = (st == S_ST);
    ctl.k_st   = (st == S_KST);
    ctl.comp   = (st == S_CMP);
    ctl.cap    = (st == S_CAP);
    push       = (st == S_PUSH) && !out_full;
    stall      = (st == S_PUSH) && out_full;
    busy       = (st != S_IDLE);
  end
endmodule
