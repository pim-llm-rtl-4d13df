// pim_llm_pkg: constants and types shared by the hybrid PIM/TPU accelerator for
// 1-bit LLMs. The systolic array size (32x32), the 8-bit MAC precision, the
// 256x256 crossbar size and the 8-bit ADC resolution follow the paper; the
// LPDDR word width, address width and the ternary weight encoding are this
// design's own choices.
package pim_llm_pkg;

  // ---- precisions -------------------------------------------------------
  localparam int unsigned ACT_W   = 8;    // 8-bit activations (W1A8 / W8A8)
  localparam int unsigned ACC_W   = 32;   // systolic PE accumulator width

  // ---- TPU --------------------------------------------------------------
  localparam int unsigned SA_DIM  = 32;   // 32 x 32 systolic array

  // ---- PIM --------------------------------------------------------------
  localparam int unsigned XBAR_ROWS = 256; // 256 x 256 RRAM crossbar
  localparam int unsigned XBAR_COLS = 256;

  // ---- LPDDR port -------------------------------------------------------
  localparam int unsigned MEM_DW = 256;   // one word = 32 activations
  localparam int unsigned MEM_AW = 32;    // word address

  typedef logic [MEM_AW-1:0] mem_addr_t;
  typedef logic [MEM_DW-1:0] mem_word_t;

  // Request channel of the LPDDR port (valid/ready handshake).
  typedef struct packed {
    logic      valid;
    logic      we;
    mem_addr_t addr;
    mem_word_t wdata;
  } mem_req_t;

  // Read response channel (in order, no back-pressure).
  typedef struct packed {
    logic      valid;
    mem_word_t rdata;
  } mem_rsp_t;

  // Ternary weight code stored by one differential device pair.
  typedef enum logic [1:0] {
    W_ZERO = 2'b00,   // both devices high-resistance
    W_POS  = 2'b01,   // G+ low-resistance, G- high-resistance
    W_NEG  = 2'b10    // G+ high-resistance, G- low-resistance
  } tern_t;

  // Post-processing unit operations.
  typedef enum logic [1:0] {
    PP_BYPASS    = 2'd0,
    PP_GELU      = 2'd1,
    PP_LAYERNORM = 2'd2
  } pp_mode_t;

  // Saturate a signed value to int8.
  function automatic logic signed [7:0] sat8(input logic signed [63:0] v);
    if (v > 127) return 8'sd127;
    else if (v < -128) return -8'sd128;
    else return v[7:0];
  endfunction

  // ---- TPU layer descriptor (one attention MatMul) ----------------------
  // A (rows x k_len) is stored column by column at a_base: word k holds
  // A[i][k] in byte i. B (k_len x cols) is stored row by row at b_base: word k
  // holds B[k][j] in byte j. Result row i is written to out_base+i, byte j.
  typedef struct packed {
    mem_addr_t   a_base;
    mem_addr_t   b_base;
    mem_addr_t   out_base;
    logic [23:0] k_len;     // reduction length, 1..memory depth
    logic [5:0]  m_rows;    // result rows to store, 1..SA_DIM
    logic        softmax;   // pass results through the ConSmax unit
    logic [4:0]  out_shift; // otherwise: int8 = sat(acc >>> out_shift)
  } tpu_desc_t;

  // Dataflow generator phases.
  typedef enum logic [1:0] {
    DG_LOAD    = 2'd0,  // LPDDR read trace -> SRAM writes
    DG_COMPUTE = 2'd1,  // SRAM read trace -> systolic array
    DG_STORE   = 2'd2   // SRAM read trace -> LPDDR writes
  } dg_mode_t;

  // ---- PIM command (from the host) --------------------------------------
  typedef enum logic [1:0] {
    PIM_PROGRAM = 2'd0, // copy ternary weights from LPDDR into one crossbar
    PIM_MVM     = 2'd1  // run one tile-level matrix-vector product
  } pim_op_t;

  typedef struct packed {
    pim_op_t     op;
    logic [3:0]  bank;
    logic [3:0]  tile;
    logic [4:0]  pe;        // PIM_PROGRAM: target PE
    mem_addr_t   src;       // LPDDR word address of weights / input vector
    mem_addr_t   dst;       // PIM_MVM: LPDDR word address of the result
    logic [8:0]  rows;      // PIM_PROGRAM: crossbar rows to program
    logic        reduce;    // PIM_MVM: sum PE outputs (row split)
    pp_mode_t    pp_mode;   // PIM_MVM: post-processing of each PE
  } pim_cmd_t;

endpackage
