// oe_pkg: word formats and constants shared by the whole accelerator.
//
// Activations and weights are 8-bit signed integers (the evaluated network
// is 8-bit quantized). Both travel in compressed sparse column (CSC) form:
// a stream of "address" words (end pointer of each column) and "data" words
// (nonzero value plus its row index). Partial sums are PSUM_W-bit signed.
// SIMD is the number of weight lanes a PE handles per cycle; it widens the
// weight data word. The bit widths are this design's choice (the source
// description only fixes the 8-bit quantisation and the 64-bit host port).
package oe_pkg;

  localparam int DATA_W  = 8;   // activation / weight width
  localparam int IDX_W   = 4;   // row index inside a CSC column (16 rows)
  localparam int SIMD    = 1;   // weight lanes per PE
  localparam int PSUM_W  = 20;  // partial-sum width
  localparam int BUS_W   = 64;  // host bus and serial-RAM word width
  localparam int CID_W   = 8;   // cluster id field of a stream entry

  // Activation stream word. is_addr=1: val holds the end pointer (exclusive)
  // of the next activation column in the data RAM. is_addr=0: a nonzero
  // activation val at row (input channel) idx.
  typedef struct packed {
    logic              is_addr;
    logic [DATA_W-1:0] val;
    logic [IDX_W-1:0]  idx;
  } iact_word_t;

  // One SIMD lane of a weight data word: weight w for output row m.
  typedef struct packed {
    logic              vld;
    logic [IDX_W-1:0]  m;
    logic [DATA_W-1:0] w;
  } w_lane_t;

  // Weight stream word. is_addr=1: lane[0].w is the end pointer of the
  // weight column of the next input channel. is_addr=0: SIMD weight lanes.
  typedef struct packed {
    logic                  is_addr;
    w_lane_t [SIMD-1:0]    lane;
  } weight_word_t;

  typedef logic signed [PSUM_W-1:0] psum_t;

  // Per-cluster PE settings: number of activation columns held by each PE
  // and number of output rows (output channels) per column.
  typedef struct packed {
    logic [3:0]       n_cols;
    logic [IDX_W:0]   n_m;
  } pe_cfg_t;

  // Command pulses from the control logic to the PEs.
  typedef struct packed {
    logic clear;      // empty the scratchpads and PSUM RAM
    logic start;      // run the sparse MAC phase
    logic out_go;     // run the PSUM output phase
  } pe_cmd_t;

  typedef enum logic [1:0] {PE_IDLE, PE_COMPUTE, PE_OUTPUT} pe_state_e;

  typedef enum logic [1:0] {ACT_BYPASS = 2'd0, ACT_RELU = 2'd1} act_mode_e;

  // Router port numbering.
  localparam int IR_EXT = 0, IR_N = 1, IR_S = 2, IR_E = 3, IR_W = 4; // iact in
  localparam int IO_PE  = 0, IO_N = 1, IO_S = 2, IO_E = 3, IO_W = 4; // iact out
  localparam int WR_EXT = 0, WR_W = 1;                               // weight in
  localparam int WO_PE  = 0, WO_E = 1;                               // weight out
  localparam int PR_EXT = 0, PR_N = 1, PR_S = 2, PR_RES = 3;         // psum in
  localparam int PO_PE  = 0, PO_N = 1, PO_S = 2, PO_EXT = 3;         // psum out

  // Configuration of one cluster, written by the serial control logic.
  // A router select equal to the router's input count means "unused".
  typedef struct packed {
    logic [4:0][2:0] iact_sel;   // source per iact router output
    logic [1:0][1:0] w_sel;      // source per weight router output
    logic [3:0][2:0] psum_sel;   // source per psum router output
    logic [31:0]     iact_mask;  // PEs that take the iact bus (bit y*PE_X+x)
    logic [7:0]      w_row_mask; // PE rows that take the weight stream
    logic [3:0]      psum_col;   // PE column on the PSUM buses
    pe_cfg_t         pe_cfg;
    act_mode_e       act_mode;
  } cluster_cfg_t;

  // Serial command stream opcodes (bits 63:60 of a command word).
  typedef enum logic [3:0] {
    OP_NOP = 4'd0, OP_WRITE_RAM = 4'd1, OP_SEND = 4'd2, OP_COLLECT = 4'd3,
    OP_CFG = 4'd4, OP_WAIT = 4'd5, OP_LAYER = 4'd6, OP_END = 4'd7
  } opcode_e;

  // Register numbers of the parallel control logic (cfg address bits 3:0).
  localparam logic [3:0] REG_IACT_SEL = 4'd0, REG_W_SEL = 4'd1, REG_PSUM_SEL = 4'd2,
                         REG_IACT_MASK = 4'd3, REG_W_ROW_MASK = 4'd4,
                         REG_PSUM_COL = 4'd5, REG_PE_CFG = 4'd6, REG_ACT = 4'd7,
                         REG_CMD = 4'd15;

endpackage
