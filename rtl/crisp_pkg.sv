// crisp_pkg: types and default sizes shared by the CRISP sparse tensor core.
//
// The accelerator multiplies a weight matrix pruned with hybrid structured
// sparsity (whole BLOCK x BLOCK blocks removed, an equal number in every
// block-row, and N of every M=4 consecutive weights kept inside the surviving
// blocks) by a dense activation matrix. The sizes below are the defaults of
// the modules that use them. Four tensor cores, 64 MACs and a 1 KB register
// file per core, 256 KB of shared memory, M = 4 with 2-bit offsets and
// N in {1,2,3} follow the paper. The 8-bit operands, 32-bit accumulators,
// 64-byte memory word and 16-bit block indices are this design's choice:
// the paper gives no precision or bus width.
package crisp_pkg;

  localparam int unsigned DATA_W     = 8;       // weight / activation width
  localparam int unsigned PROD_W     = 2 * DATA_W;
  localparam int unsigned ACC_W      = 32;      // accumulator width
  localparam int unsigned NM_M       = 4;       // M of N:M
  localparam int unsigned IDX_W      = 2;       // offset inside a group of M
  localparam int unsigned LANES      = 64;      // MAC units per tensor core
  localparam int unsigned NUM_CORES  = 4;       // tensor cores
  localparam int unsigned RF_BYTES   = 1024;    // register file per core
  localparam int unsigned SMEM_BYTES = 262144;  // shared memory
  localparam int unsigned WORD_BYTES = 64;      // shared-memory word
  localparam int unsigned BLOCK      = 64;      // block size B (B x B blocks)
  localparam int unsigned ADDR_W     = 16;      // shared-memory word address
  localparam int unsigned BIDX_W     = 16;      // one Blocked-Ellpack index
  localparam int unsigned IDX_PER_WORD  = WORD_BYTES * 8 / BIDX_W;   // 32
  localparam int unsigned WIN_PER_IWORD = WORD_BYTES * 8 / (LANES * IDX_W); // 4

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [IDX_W-1:0]         idx_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [WORD_BYTES*8-1:0]  word_t;

  // N of the N:M pattern; M is fixed at 4.
  typedef enum logic [1:0] {
    NM_1_4 = 2'd1,
    NM_2_4 = 2'd2,
    NM_3_4 = 2'd3
  } nm_mode_t;

  // One sparse matrix-multiply job, written by the host before start.
  typedef struct packed {
    nm_mode_t    nm_n;       // N of N:M
    logic [15:0] n_blkrows;  // weight block-rows (output rows / BLOCK), >= 1
    logic [15:0] n_colgrps;  // activation columns / NUM_CORES, >= 1
    logic [7:0]  kb_nz;      // non-zero blocks per block-row, >= 1
    logic [15:0] k_words;    // activation column length K in memory words
    addr_t       w_base;     // compressed non-zero weights, one window per word
    addr_t       m_base;     // 2-bit offsets, WIN_PER_IWORD windows per word
    addr_t       b_base;     // block column indices, IDX_PER_WORD per word
    addr_t       a_base;     // activations, column-major, k_words per column
  } job_t;

  // Groups of M activations a window of LANES MACs covers: each group
  // holds N non-zero weights, so LANES/N groups fit (64, 32, 21).
  function automatic int unsigned groups_per_window(nm_mode_t n, int unsigned lanes);
    case (n)
      NM_1_4:  return lanes;
      NM_2_4:  return lanes / 2;
      default: return lanes / 3;
    endcase
  endfunction

endpackage
