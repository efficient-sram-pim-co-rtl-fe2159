// dbpim_pkg: sizes, types and the instruction encoding shared by the DB-PIM
// accelerator. The structural numbers (8 PIM cores, Tm=4 macros per core,
// 16 compartments x 16 DBMU columns x 16 SRAM rows per macro, 128-input
// switch windows, INT8 data, buffer capacities) follow the paper. The
// accumulator width, the SIMD lane count and the 64-bit instruction format
// are this design's own choices.
package dbpim_pkg;

  // ---- array geometry ----------------------------------------------------
  localparam int unsigned NCORE = 8;    // PIM cores / switches
  localparam int unsigned TM    = 4;    // macros per core (input rows in flight)
  localparam int unsigned COMPS = 16;   // compartments per macro (Tk1)
  localparam int unsigned COLS  = 16;   // DBMU columns per compartment
  localparam int unsigned ROWS  = 16;   // SRAM cells per DBMU (Tk2)
  localparam int unsigned WIN   = 128;  // inputs per switch window
  localparam int unsigned IW    = 8;    // INT8 input features
  localparam int unsigned ACC_W = 32;   // column accumulator width
  localparam int unsigned SUM_W = 13;   // CSD adder tree output width

  // ---- buffers -----------------------------------------------------------
  localparam int unsigned INBUF_W     = TM * WIN * IW;   // 4096 bits / word
  localparam int unsigned INBUF_DEPTH = 256;             // 128 KB
  localparam int unsigned LANES       = 16;              // 32-bit lanes / word
  localparam int unsigned OUTBUF_W    = LANES * ACC_W;   // 512 bits / word
  localparam int unsigned OUTBUF_DEPTH= 4096;            // 256 KB
  localparam int unsigned INST_W      = 64;
  localparam int unsigned INST_DEPTH  = 2048;            // 16 KB
  localparam int unsigned MASK_DEPTH  = 16;              // 2 Kb per mask RF
  localparam int unsigned META_W      = COMPS * COLS * 3;// 768 bits per row

  // ---- instruction set ---------------------------------------------------
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_MVM   = 4'd1,   // one input window through switches and macros
    OP_STORE = 4'd2,   // output RFs -> output buffer (32 words)
    OP_SIMD  = 4'd3,   // vector operation over output-buffer words
    OP_HALT  = 4'd4
  } opcode_e;

  typedef enum logic [3:0] {
    SIMD_ADD   = 4'd0,  // residual add
    SIMD_MUL   = 4'd1,  // element-wise multiply
    SIMD_MAX   = 4'd2,  // max (pooling step)
    SIMD_RELU  = 4'd3,
    SIMD_QUANT = 4'd4,  // >>shift, round, saturate to INT8 (kept 32-bit)
    SIMD_QSTORE= 4'd5   // as QUANT, then written as 16 INT8 to the input buffer
  } simd_op_e;

  // MVM:   [59:52] input-buffer word, [51:48] mask word, [47:44] first SRAM
  //        row, [43] clear accumulators first
  // STORE: [59:48] output-buffer base (word = base + core*TM + macro)
  // SIMD:  [59:56] op, [55:44] src a, [43:32] src b, [31:16] dst,
  //        [15:11] shift, [10:3] count-1
  typedef struct packed {
    opcode_e      op;
    logic [59:0]  body;
  } inst_t;

  typedef struct packed {
    logic [7:0] in_addr;
    logic [3:0] mask_addr;
    logic [3:0] row_base;
    logic       acc_clr;
    logic [42:0] rsvd;
  } mvm_f_t;

  typedef struct packed {
    simd_op_e    sop;
    logic [11:0] src_a;
    logic [11:0] src_b;
    logic [15:0] dst;
    logic [4:0]  shift;
    logic [7:0]  cnt_m1;
    logic [2:0]  rsvd;
  } simd_f_t;

  // host load targets
  typedef enum logic [2:0] {
    LD_INST   = 3'd0,
    LD_INBUF  = 3'd1,
    LD_MASK   = 3'd2,
    LD_META   = 3'd3,
    LD_WEIGHT = 3'd4,
    LD_PAIR   = 3'd5
  } ld_target_e;

endpackage
