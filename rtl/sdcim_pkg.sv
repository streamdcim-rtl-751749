// sdcim_pkg: types and constants shared by the StreamDCIM accelerator.
//
// The sizes follow the described chip: 16-bit (INT16) operands, SRAM-CIM
// arrays of 4 rows, eight arrays per macro, eight macros per CIM core, and a
// 64-bit input activation bus per macro half (In[0]..In[63]). Operands travel
// bit-serially, one bit plane of 64 lanes per cycle, most significant plane
// first. The word width of the buffers (64 lanes of 16 bits), the accumulator
// and partial-sum widths, and all command formats are this design's choices.
package sdcim_pkg;

  localparam int DATA_W    = 16;   // INT16 operands
  localparam int LANES     = 64;   // lanes per buffer word / per macro half
  localparam int ROWS      = 4;    // rows per SRAM-CIM array
  localparam int ARRAYS    = 8;    // arrays per macro
  localparam int MACROS    = 8;    // macros per CIM core
  localparam int TILE_ROWS = ROWS * ARRAYS;  // 32 rows stored per macro half
  localparam int PSUM_W    = 24;   // adder-tree output width
  localparam int ACC_W     = 40;   // accumulator width
  localparam int BANK_WORDS = 256; // 32 KB bank / 128-byte word
  localparam int ADDR_W    = 9;    // two banks of 256 words

  typedef logic [LANES-1:0][DATA_W-1:0] vec_t;     // one 1024-bit buffer word

  // One bit plane of a bit-serial operand stream.
  typedef struct packed {
    logic             valid;
    logic             msb;    // first plane (sign bit, weight -2^15)
    logic             last;   // last plane (LSB)
    logic [LANES-1:0] bits;
  } act_t;

  localparam act_t ACT_IDLE = '{valid: 1'b0, msb: 1'b0, last: 1'b0, bits: '0};

  // Sources of the CIM rewriting select MUX, in the order drawn in the
  // macro diagram: I_X/I_Y, Q_X/K_X/V_X, W_Q/W_K/W_V, Q_Y/K_Y/V_Y.
  typedef enum logic [1:0] {
    SRC_INPUT  = 2'd0,   // input buffer
    SRC_RES_X  = 2'd1,   // results of modal X (output buffer bank 0)
    SRC_WEIGHT = 2'd2,   // weight buffer
    SRC_RES_Y  = 2'd3    // results of modal Y (output buffer bank 1)
  } src_sel_e;

  typedef enum logic [1:0] {
    CORE_Q   = 2'd0,
    CORE_K   = 2'd1,
    CORE_TBR = 2'd2
  } core_e;

  typedef enum logic [1:0] {
    SFU_PASS    = 2'd0,
    SFU_SOFTMAX = 2'd1,
    SFU_GELU    = 2'd2
  } sfu_func_e;

  typedef enum logic [2:0] {
    OP_WS_QK   = 3'd0,   // weight-stationary pass on Q-CIM (stream A) and K-CIM (stream B)
    OP_WS_TBR  = 3'd1,   // weight-stationary pass on TBR-CIM in normal mode (A+B = 128 elements)
    OP_XFWD    = 3'd2,   // one cross-forwarding step of the TBR-CIM core
    OP_PRUNE   = 3'd3,   // DTPU ranks the collected scores and updates the keep mask
    OP_MODE    = 3'd4,   // set mode_config of the TBR-CIM macros
    OP_DTPU_CLR = 3'd5   // clear DTPU column sums and keep mask (keep all)
  } op_e;

  // Compute command.
  typedef struct packed {
    op_e                 op;
    logic [ADDR_W-1:0]   addr_a;     // first input row (stream A)
    logic [ADDR_W-1:0]   addr_b;     // first input row (stream B)
    logic [6:0]          n_tok;      // tokens in the pass (1..64)
    logic [1:0]          core_mask;  // OP_WS_QK: bit0 Q-CIM, bit1 K-CIM
    logic [2:0]          src;        // OP_XFWD: source TBR macro
    logic                dir;        // OP_XFWD: 0 = I*W (consumers >= src), 1 = Q*K^T (consumers <= src)
    logic [ADDR_W-1:0]   out_addr0;  // results of Q-CIM / TBR-CIM
    logic [ADDR_W-1:0]   out_addr1;  // results of K-CIM
    logic [5:0]          shift;      // right shift applied before INT16 saturation
    sfu_func_e           sfu_func;
    logic                dtpu_en;    // DTPU accumulates the (post-SFU) words of this pass
    logic [6:0]          keep_cnt;   // OP_PRUNE: tokens kept
    logic [MACROS-1:0]   mode;       // OP_MODE: mode_config per TBR macro (1 normal, 0 hybrid)
  } ccmd_t;

  // Rewrite command: writes n_rows consecutive rows of one half of a macro.
  typedef struct packed {
    core_e               core;
    logic [2:0]          macro;
    logic                half;       // 0 left (input part), 1 right (weight part)
    logic [4:0]          row0;       // first tile row (array = row/4, row = row%4)
    logic [5:0]          n_rows;     // 1..32
    src_sel_e            sel;
    logic [ADDR_W-1:0]   src_addr;
  } rcmd_t;

endpackage
