// sscs_engine: sparsity-aware selective charge sharing. For each of the 64
// columns it gates the common TG enable: a column whose query element is zero
// is kept out of charge sharing outside precharge, so the RBL voltage becomes
// the mean over the columns that can carry a product and a sparse query does
// not shrink the analog signal. During precharge all columns follow tg_in.
// Interface: purely combinational. The per-column function follows the SSCS
// circuit of the chip (mux of '0' and TG_in selected by q_n==0 outside
// precharge); the global sscs_en switch, to run without SSCS, is this
// design's own addition.
module sscs_engine #(
  parameter int DD = 64
) (
  input  logic          tg_in,
  input  logic          prech,
  input  logic          sscs_en,
  input  logic [DD-1:0] q_zero,
  output logic [DD-1:0] tg_ctrl
);
  always_comb begin
    for (int n = 0; n < DD; n++)
      tg_ctrl[n] = (sscs_en && q_zero[n] && !prech) ? 1'b0 : tg_in;
  end
endmodule
