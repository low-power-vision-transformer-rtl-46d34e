// vit_pkg: constants and types shared by the ViT accelerator.
//
// The compute fabric is 8 PE groups x 8 PE arrays x 8 MACs = 512 INT8 MACs.
// One cycle consumes a tile of 8 token rows x 64 reduction elements and one
// 64-element weight column, and after K/64 cycles the accumulator emits the
// 8 output elements of one output column for those 8 token rows.
//
// All on-chip memories are built from 64-bit words (8 INT8 values), matching
// the 8x8-bit links of the data bus. The memory layout of an activation
// matrix A (rows = tokens, columns = features) is fixed throughout the design:
//   element A[t][c] lives in bank (t%8)*8 + (c%64)/8,
//   word address base + (t/8)*stride + c/64, byte lane c%8,
// so one address applied to all 64 banks yields an 8x64 tile.
// The geometry (8/8/8, 64-bit words, bank counts and depths) follows the
// paper; the encoding of commands below is this design's own.
package vit_pkg;

  localparam int unsigned DATA_W   = 8;    // INT8 activations and weights
  localparam int unsigned N_GROUPS = 8;    // PE groups
  localparam int unsigned N_ROWS   = 8;    // PE arrays per group = token rows per tile
  localparam int unsigned N_MACS   = 8;    // MACs per PE array
  localparam int unsigned K_TILE   = N_GROUPS * N_MACS;  // 64 reduction elements per cycle
  localparam int unsigned WORD_W   = 64;   // 8 x 8-bit
  localparam int unsigned PSUM_W   = 20;   // one PE array: 8 products of 16 bits
  localparam int unsigned ACC_W    = 32;   // accumulator width

  // On-chip memories (Fig. 8): 64 x 1.25KB token, 2 x 8 x 4.5KB weight,
  // 2 x 64 x 0.625KB temp = 232KB.
  localparam int unsigned TOK_BANKS  = 64;
  localparam int unsigned TOK_DEPTH  = 160;  // 1280 B / 8 B
  localparam int unsigned WGT_BANKS  = 8;
  localparam int unsigned WGT_DEPTH  = 576;  // 4608 B / 8 B
  localparam int unsigned TMP_BANKS  = 64;
  localparam int unsigned TMP_DEPTH  = 80;   // 640 B / 8 B

  localparam int unsigned ADDR_W = 10;       // covers the deepest bank (576)

  localparam int unsigned MAX_TOKENS = 256;  // softmax row / class attention buffer
  localparam int unsigned TOK_IDX_W  = 8;

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic [WORD_W-1:0]        word_t;

  // Memory selectors.
  typedef enum logic [1:0] {
    MEM_TOKEN = 2'd0,
    MEM_TEMP1 = 2'd1,
    MEM_TEMP2 = 2'd2
  } amem_e;

  typedef enum logic [1:0] {
    WSRC_SET0  = 2'd0,   // weight SRAM set 0
    WSRC_SET1  = 2'd1,   // weight SRAM set 1
    WSRC_TEMP1 = 2'd2,   // a stored activation row used as the broadcast operand (Q, V^T)
    WSRC_TEMP2 = 2'd3
  } wsrc_e;

  // Host data-bus target.
  typedef enum logic [2:0] {
    BUS_TOKEN = 3'd0,
    BUS_WSET0 = 3'd1,
    BUS_WSET1 = 3'd2,
    BUS_TEMP1 = 3'd3,
    BUS_TEMP2 = 3'd4
  } bus_target_e;

  // One matrix multiplication OUT[M][N] = X[M][K] * W[K][N] with post-processing.
  typedef struct packed {
    logic [5:0]  m_tiles;      // ceil(M/8) token tiles
    logic [8:0]  m_valid;      // M, rows >= M are masked in softmax
    logic [4:0]  k_chunks;     // ceil(K/64)
    logic [10:0] k_len;        // K; broadcast operands at k >= K are forced to zero
    logic [10:0] n_cols;       // N
    logic        col_order;    // 0: row-wise output (N inner), 1: column-wise output (M inner)
    amem_e       x_src;
    logic [9:0]  x_base;
    wsrc_e       w_src;
    logic [9:0]  w_base;
    amem_e       dst;
    logic [9:0]  dst_base;
    logic [9:0]  dst_stride;
    logic        dst_transpose; // store OUT^T in the activation layout
    logic [4:0]  shift;        // requantisation: arithmetic right shift of the 32-bit sum
    logic        relu;
    logic        residual;     // add INT8 value read from res_src at the output position
    amem_e       res_src;
    logic [9:0]  res_base;
    logic [9:0]  res_stride;
    logic        softmax;      // row-wise softmax (requires col_order = 1); output stored transposed
    logic        cls_capture;  // feed the class-token softmax row to token pruning
    logic        prune;        // FFN2 pruning on this (FFN1) output (requires col_order = 1)
    logic [15:0] threshold;    // FFN2 pruning threshold on the per-dimension sum
  } cmd_t;

endpackage
