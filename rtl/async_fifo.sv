// async_fifo: dual-clock FIFO of 2**AW words of W bits. Write and read
// pointers are kept in binary and Gray code; each side sees the other's Gray
// pointer through a two-flop synchroniser, so full and empty are
// conservative (they clear a few cycles late) and never wrong. rdata shows
// the oldest word whenever empty is low (first-word fall-through); rd_en
// pops it. Writes while full and reads while empty are ignored. Each side has
// its own synchronous active-low reset, applied together at start-up.
module async_fifo #(
  parameter int W  = 32,
  parameter int AW = 3
) (
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wdata,
  output logic         full,
  input  logic         rclk,
  input  logic         rrst_n,
  input  logic         rd_en,
  output logic [W-1:0] rdata,
  output logic         empty
);
  logic [W-1:0] mem [2**AW];
  logic [AW:0]  wbin, wgray, rbin, rgray;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;
  wire [AW:0] wbin_n = wbin + (AW+1)'(do_wr);
  wire [AW:0] rbin_n = rbin + (AW+1)'(do_rd);

  always_ff @(posedge wclk) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_n;
      wgray    <= bin2gray(wbin_n);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wclk) if (do_wr) mem[wbin[AW-1:0]] <= wdata;

  always_ff @(posedge rclk) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_n;
      rgray    <= bin2gray(rbin_n);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  assign full  = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign empty = (rgray == wgray_r2);
  assign rdata = mem[rbin[AW-1:0]];
endmodule
