// analog_pe: BEHAVIOURAL MODEL of one analog processing element of the
// bitline processor (switched-capacitor circuit, modelled with reals).
// It serves one key: its four RBLs carry k bits 0..3 of that key.
// Q-BWS (one per RBL): each cycle the RBL drop (VDD - RBL) is sampled on
// C_SP (q_sp) after C_SP was refreshed (prech/q_ref), then shared with a
// storage capacitor C_ST (q_st), so C_ST = (C_ST + C_SP)/2. After q bits
// 0..3 this holds sum 2^(b-4) * drop_b: the binary weights of q. A signed
// Q-BWS has two C_ST: a term is negative when exactly one of the q bit and
// the k bit is bit 3 (two's complement MSB weight -8). On each store the
// C_ST of the other sign shares with the refreshed, empty C_SP, so both keep
// the same binary weights. K-BWS: k_st samples V_o[k_sel] of the positive and
// of the negative side (the Q-BWS C_ST serves as its sampling capacitor) and
// shares it with the K-BWS store; LSB first, giving
//   vpos - vneg = VDD * (q.k) / (256 * n)   (n = columns sharing charge).
// Each control acts at a clock edge. Equal capacitors follow the chip; the
// handling of the idle-sign C_ST is this design's choice.
module analog_pe #(
  parameter real VDD = 1.0
) (
  input  logic       clk,
  input  real        rbl_v [4],
  input  logic [1:0] qbit,
  input  logic       clr,
  input  logic       q_ref,
  input  logic       q_sp,
  input  logic       q_st,
  input  logic       k_st,
  input  logic [1:0] k_sel,
  output real        vpos,
  output real        vneg
);
  real csp [4];
  real cstp [4];
  real cstn [4];

  always @(posedge clk) begin
    if (clr) begin
      for (int r = 0; r < 4; r++) begin
        cstp[r] = 0.0;
        cstn[r] = 0.0;
      end
      vpos = 0.0;
      vneg = 0.0;
    end
    if (q_ref) for (int r = 0; r < 4; r++) csp[r] = 0.0;
    if (q_sp)  for (int r = 0; r < 4; r++) csp[r] = VDD - rbl_v[r];
    if (q_st) begin
      for (int r = 0; r < 4; r++) begin
        if ((qbit == 2'd3) == (r == 3)) begin
          cstp[r] = (cstp[r] + csp[r]) / 2.0;
          cstn[r] = cstn[r] / 2.0;
        end else begin
          cstn[r] = (cstn[r] + csp[r]) / 2.0;
          cstp[r] = cstp[r] / 2.0;
        end
      end
    end
    if (k_st) begin
      vpos = (vpos + cstp[k_sel]) / 2.0;
      vneg = (vneg + cstn[k_sel]) / 2.0;
    end
  end

  initial begin
    for (int r = 0; r < 4; r++) begin
      csp[r] = 0.0; cstp[r] = 0.0; cstn[r] = 0.0;
    end
    vpos = 0.0;
    vneg = 0.0;
  end
endmodule
