// kv_buffer: the 2KB key/value buffer, NS slots each holding one token's
// 64 x 8-bit key and 64 x 8-bit value, plus a tag (token index) and a valid
// bit per slot. Three write streams fill a slot beat by beat:
//   K_MSB beat t (32 bits, from the CIM array) is one half row of bit-plane
//     b = t/2: element n = 32*(t%2) + i gets key bit 4+b from bit i;
//   K_LSB beat t (32 bits) gives elements 8t..8t+7 their low 4 bits;
//   V beat t (64 bits) gives elements 8t..8t+7 of the value.
// set_en marks a slot valid for token set_tok; inv_en invalidates a slot
// (inv wins over set on the same slot). Reads of a slot and the token lookup
// (lk_hit/lk_slot) are combinational; resident is the set of held tokens.
// Capacity follows the chip; organisation, tagging and transposition of
// the CIM bit-planes are this design's choice.
module kv_buffer
  import attn_pkg::*;
#(
  parameter int NS = N_SLOT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [$clog2(NS)-1:0] wr_slot,
  input  logic                  kmsb_we,
  input  logic [2:0]            kmsb_beat,
  input  logic [31:0]           kmsb_data,
  input  logic                  lsbv_we,
  input  logic [2:0]            lsbv_beat,
  input  logic [31:0]           klsb_data,
  input  logic [63:0]           v_data,
  input  logic                  set_en,
  input  logic [$clog2(NS)-1:0] set_slot,
  input  logic [TOK_W-1:0]      set_tok,
  input  logic                  inv_en,
  input  logic [$clog2(NS)-1:0] inv_slot,
  input  logic [$clog2(NS)-1:0] rd_slot,
  output logic signed [7:0]     k_row [D],
  output logic [7:0]            v_row [D],
  input  logic [TOK_W-1:0]      lk_tok,
  output logic                  lk_hit,
  output logic [$clog2(NS)-1:0] lk_slot,
  output logic [NS-1:0]         valid,
  output logic [TOK_W-1:0]      tag [NS],
  output logic [N_TOK-1:0]      resident
);
  logic [7:0] kmem [NS][D];
  logic [7:0] vmem [NS][D];

  always_ff @(posedge clk) begin
    if (kmsb_we)
      for (int i = 0; i < 32; i++)
        kmem[wr_slot][32*int'(kmsb_beat[0]) + i][4 + int'(kmsb_beat[2:1])] <= kmsb_data[i];
    if (lsbv_we)
      for (int i = 0; i < 8; i++) begin
        kmem[wr_slot][8*int'(lsbv_beat) + i][3:0] <= klsb_data[4*i +: 4];
        vmem[wr_slot][8*int'(lsbv_beat) + i]      <= v_data[8*i +: 8];
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid <= '0;
      for (int s = 0; s < NS; s++) tag[s] <= '0;
    end else begin
      if (set_en) begin
        valid[set_slot] <= 1'b1;
        tag[set_slot]   <= set_tok;
      end
      if (inv_en) valid[inv_slot] <= 1'b0;
    end
  end

  always_comb begin
    for (int n = 0; n < D; n++) begin
      k_row[n] = kmem[rd_slot][n];
      v_row[n] = vmem[rd_slot][n];
    end
  end

  always_comb begin
    lk_hit   = 1'b0;
    lk_slot  = '0;
    resident = '0;
    for (int s = NS - 1; s >= 0; s--) begin
      if (valid[s]) resident[tag[s]] = 1'b1;
      if (valid[s] && tag[s] == lk_tok) begin
        lk_hit  = 1'b1;
        lk_slot = s[$clog2(NS)-1:0];
      end
    end
  end
endmodule
