// gobo_pkg: constants and types shared by the GOBO tile, global buffer,
// decompression engine and top level.
//
// GOBO stores each fully-connected layer as a small dictionary of FP32
// centroids, one 3-bit index per weight, and a short list of FP32 outliers.
// A layer's weight matrix is cut into 16x16 submatrices (SM); each SM is cut
// into 16 blocks of 16 indexes, a block being what one tile consumes per
// cycle. These sizes follow the paper. The 40-bit outlier entry
// {block[3:0], weight[3:0], value[31:0]} also follows the paper; placing the
// per-SM count in bits [39:32] of an entry of the same width is this
// design's choice.
package gobo_pkg;

  localparam int unsigned FP_W       = 32;  // FP32 activations, centroids, outliers
  localparam int unsigned NPE        = 16;  // PEs per tile = weights per block
  localparam int unsigned BLKS_PER_SM = 16; // blocks per 16x16 submatrix
  localparam int unsigned IDX_BITS   = 3;   // weight index width of one tile
  localparam int unsigned NCENT      = 1 << IDX_BITS; // PE register-file entries
  localparam int unsigned WIDX_FIELD = 4;   // index field in a weight block word (4b pairs)
  localparam int unsigned WBLK_W     = NPE * WIDX_FIELD; // 64b weight block word
  localparam int unsigned OCF_W      = 40;  // outlier/centroid stream entry

  typedef logic [FP_W-1:0] fp32_t;

  // One entry of the outlier/centroid stream.
  typedef struct packed {
    logic [3:0] blk;   // block within the SM (count entries: count[7:4])
    logic [3:0] wofs;  // weight offset within the block (count entries: count[3:0])
    fp32_t      value; // outlier weight or centroid
  } ocf_entry_t;

  // Operation of the shared processing unit in one cycle.
  typedef enum logic [1:0] {
    SPU_NONE     = 2'd0,
    SPU_CENTROID = 2'd1,  // out[pe_sel] += pe_rf[pe_sel] * coef
    SPU_OUTLIER  = 2'd2,  // out[pe_sel] += pe15_act * coef
    SPU_PAIR     = 2'd3   // out[pe_sel] += pair_val
  } spu_op_e;

endpackage
