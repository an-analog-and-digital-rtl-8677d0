// cim_array: BEHAVIOURAL MODEL of the transposable 9T charge-domain CIM array
// (256 rows x 64 columns, 16Kb). It is analog and process specific; this
// model keeps the stored bits in an array and the node voltages as reals.
//
// Storage: key j, MSB bit-plane b, element n sits at row 4j+b, column n.
// Standard access (WL/BL, vertical): addr = {row, half}; one 32-bit half row
// per access through a 2:1 column mux. rdata is valid one cycle after re.
// Writes are synchronous.
// CIM access (RWL/RBL, horizontal), one clock cycle per phase:
//   prech : every bitcell capacitor and RBL charges to VDD;
//   mult  : a capacitor discharges where the stored bit and its column's RWL
//           are both 1 (it holds the inverse of the product);
//   acc   : on each row the capacitors of columns with tg_ctrl=1 share
//           charge, RBL = mean of their voltages = VDD*(1 - ones/n).
// The standard port and the CIM phases work in the same cycle, as on the
// chip. The model is ideal (no leakage, mismatch or noise). Mapping of keys
// to rows and the phase ordering follow the chip; the column mux ratio and
// the one-cycle phases are this design's choice.
module cim_array
  import attn_pkg::*;
#(
  parameter int  NROW = ROWS,
  parameter int  NCOL = D,
  parameter real VDD  = 1.0
) (
  input  logic                   clk,
  // standard read/write port
  input  logic                   we,
  input  logic                   re,
  input  logic [$clog2(NROW):0]  addr,
  input  logic [NCOL/2-1:0]      wdata,
  output logic [NCOL/2-1:0]      rdata,
  // CIM port
  input  logic                   prech,
  input  logic                   mult,
  input  logic                   acc,
  input  logic [NCOL-1:0]        rwl,
  input  logic [NCOL-1:0]        tg_ctrl,
  output real                    rbl_v [NROW]
);
  localparam int HW = NCOL / 2;
  logic [NCOL-1:0] bits [NROW];
  real             vc   [NROW][NCOL];

  wire [$clog2(NROW)-1:0] row  = addr[$clog2(NROW):1];
  wire                    half = addr[0];

  always @(posedge clk) begin
    if (we) bits[row][half*HW +: HW] <= wdata;
    if (re) rdata <= bits[row][half*HW +: HW];
  end

  always @(posedge clk) begin
    if (prech) begin
      for (int r = 0; r < NROW; r++) begin
        rbl_v[r] = VDD;
        for (int c = 0; c < NCOL; c++) vc[r][c] = VDD;
      end
    end else if (mult) begin
      for (int r = 0; r < NROW; r++)
        for (int c = 0; c < NCOL; c++)
          if (rwl[c] && bits[r][c]) vc[r][c] = 0.0;
    end else if (acc) begin
      for (int r = 0; r < NROW; r++) begin
        real s;
        int  n;
        s = 0.0;
        n = 0;
        for (int c = 0; c < NCOL; c++)
          if (tg_ctrl[c]) begin
            s += vc[r][c];
            n++;
          end
        if (n > 0) begin
          rbl_v[r] = s / n;
          for (int c = 0; c < NCOL; c++)
            if (tg_ctrl[c]) vc[r][c] = s / n;
        end
      end
    end
  end

  initial begin
    for (int r = 0; r < NROW; r++) begin
      rbl_v[r] = VDD;
      for (int c = 0; c < NCOL; c++) vc[r][c] = VDD;
    end
  end
endmodule
