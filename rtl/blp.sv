// blp: BEHAVIOURAL MODEL of the bitline processor: 64 analog processing
// elements, one per key, each fed by the four consecutive RBLs 4j..4j+3 that
// hold bits 0..3 of key j. All elements share the phase controls from the
// analog processor control unit and produce V_POS[j] and V_NEG[j] for the
// comparators (see analog_pe for the charge arithmetic and timing).
module blp
  import attn_pkg::*;
#(
  parameter int  NPE = N_TOK,
  parameter real VDD = 1.0
) (
  input  logic       clk,
  input  real        rbl_v [4*NPE],
  input  logic [1:0] qbit,
  input  logic       clr,
  input  logic       q_ref,
  input  logic       q_sp,
  input  logic       q_st,
  input  logic       k_st,
  input  logic [1:0] k_sel,
  output real        vpos [NPE],
  output real        vneg [NPE]
);
  for (genvar j = 0; j < NPE; j++) begin : g_pe
    real rb [4];
    always_comb for (int r = 0; r < 4; r++) rb[r] = rbl_v[4*j + r];
    analog_pe #(.VDD(VDD)) u_pe (
      .clk, .rbl_v(rb), .qbit, .clr, .q_ref, .q_sp, .q_st, .k_st, .k_sel,
      .vpos(vpos[j]), .vneg(vneg[j])
    );
  end
endmodule
