// lut_llm_pkg: constants and types shared by the LUT-LLM accelerator blocks.
//
// The CFG_ quantization constants are the main configuration of the architecture:
// activation vectors of V = 2 elements, C_A = 64 activation centroids per
// codebook, C_W = 16 weight centroids per codebook, G = 512 weight vectors
// per quantization group and INT8 (unsigned, zero-point) lookup-table
// entries. The BPCSU chain length of 16 dPEs (a 16 x 4 array with a 2-level
// argmin tree) also follows the source architecture. N_PAIRS, M_MAX, D_MAX
// and TOK_MAX are this design's own choices, derived from the table-loading
// bandwidth and the target model (see README).
package lut_llm_pkg;

  localparam int unsigned CFG_V = 2;      // activation / weight vector length
  localparam int unsigned CFG_CA = 64;     // activation centroids per codebook
  localparam int unsigned CFG_CW = 16;     // weight centroids per codebook
  localparam int unsigned CFG_G = 512;    // weight vectors per VQ group
  localparam int unsigned CFG_L_CHAIN = 16;     // dPEs per BPCSU pipeline chain
  localparam int unsigned CFG_LUT_W = 8;      // lookup-table entry width (INT8)
  localparam int unsigned CFG_ACC_W = 32;     // partial-sum / accumulator width
  localparam int unsigned CFG_N_PAIRS = 8;      // BPCSU + 2D-PSum pairs
  localparam int unsigned CFG_M_MAX = 6144;   // largest output dimension
  localparam int unsigned CFG_D_MAX = 6144;   // largest input dimension
  localparam int unsigned CFG_TOK_MAX = 128;    // tokens held in the output buffer
  localparam int unsigned CFG_DQ_LANES = 16;     // FP32 values per output beat

  // Destination of a LUTLinear result, selected by the execution control word
  // given to the accumulator (coarse-grain reconfiguration of the data path).
  typedef enum logic [2:0] {
    DEST_HBM      = 3'd0,   // output writer
    DEST_ATTN_Q   = 3'd1,   // attention engine, query
    DEST_ATTN_K   = 3'd2,   // attention engine, key (also written to KV cache)
    DEST_ATTN_V   = 3'd3,   // attention engine, value (also written to KV cache)
    DEST_SWI_GATE = 3'd4,   // SwiGLU gate operand
    DEST_SWI_UP   = 3'd5,   // SwiGLU up operand
    DEST_NORM     = 3'd6    // residual add + RMSNorm
  } dest_e;

endpackage
