// attn_pkg: sizes and types shared by the hybrid attention accelerator.
// 64 key tokens are held in the CIM array, every vector has 64 elements of
// 8 bits, of which the 4 MSBs take part in the analog pruning pass. The
// buffer depths (4 query slots, 16 K/V slots) are derived from the buffer
// capacities of the chip (1Kb CIM Q buffer, 2KB K/V buffer); the split of a
// token into 8 bus beats is this design's choice.
package attn_pkg;
  localparam int N_TOK   = 64;   // keys held by the CIM array
  localparam int D       = 64;   // elements per q/k/v vector
  localparam int DW      = 8;    // digital element width
  localparam int MW      = 4;    // MSBs used by the CIM core
  localparam int N_Q     = 4;    // query slots in the Q buffers
  localparam int N_SLOT  = 16;   // token slots in the K/V buffer
  localparam int BEATS   = 8;    // bus beats per token per memory
  localparam int ROWS    = 256;  // CIM rows = 4 bit-planes x 64 keys
  localparam int TOK_W   = $clog2(N_TOK);
  localparam int QI_W    = $clog2(N_Q);
  localparam int CIM_AW  = 9;    // {row[7:0], half}
  localparam int SRAM_AW = 9;    // 64 tokens x 8 beats
  localparam int P_W     = 12;   // softmax probability width
  localparam int O_W     = 12;   // output element width

  typedef logic [N_TOK-1:0] tokvec_t;

  // One masked-index record sent from the CIM core to the digital core.
  typedef struct packed {
    logic [QI_W-1:0] qi;
    tokvec_t         u;
  } idx_rec_t;

  // Control outputs of the analog processor control unit.
  typedef struct packed {
    logic [QI_W-1:0] qsel;   // query slot under CIM operation
    logic [1:0]      qbit;   // q bit position being processed
    logic            prech;  // CIM precharge phase (also Q-BWS refresh)
    logic            mult;   // CIM multiply phase (RWLs driven)
    logic            acc;    // CIM accumulate phase (charge sharing)
    logic            q_sp;   // Q-BWS sample
    logic            q_st;   // Q-BWS store
    logic            pe_clr; // clear all storage capacitors
    logic            k_st;   // K-BWS sample+store of V_o[k_sel]
    logic [1:0]      k_sel;
    logic            comp;   // comparators latch
    logic            cap;    // pruning index buffer capture
  } actl_t;

  // Analog-side host write targets.
  typedef enum logic [1:0] {A_KEY = 2'd0, A_QMSB = 2'd1, A_MASK = 2'd2} a_sel_e;
  // Digital-side host write targets.
  typedef enum logic [1:0] {D_KLSB = 2'd0, D_VAL = 2'd1, D_QBUF = 2'd2} d_sel_e;
endpackage
