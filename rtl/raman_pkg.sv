// raman_pkg: sizes, encodings and record types shared by the accelerator.
//
// The numbers that come from the published architecture are the 3x4 PE
// array, 4 MACs per PE, 8b operands, 24b partial sums, a 16-deep reg-file
// per PE (n = 16 output channels per weight tile), 12b value/index weight
// pairs, a 192b parameter memory word, a 32b activation memory word, a 160b
// post-processing parameter word, 27 cache banks of 8b and an 80b
// instruction with a 3b opcode. The bit layout of the instruction beyond the
// opcode position, the opcode values and every memory depth are choices of
// this implementation.
package raman_pkg;

  // ---------------------------------------------------------------- array
  localparam int ROWS      = 3;   // PE rows
  localparam int COLS      = 4;   // PE columns
  localparam int SIMD      = 4;   // MAC lanes per PE
  localparam int DATA_W    = 8;   // activation / weight width
  localparam int PSUM_W    = 24;  // partial sum width
  localparam int RF_DEPTH  = 16;  // reg-file entries per PE (= tile width n)
  localparam int RF_AW     = 4;   // log2(RF_DEPTH)
  localparam int PAIR_W    = 12;  // 8b weight value + 4b column index

  // --------------------------------------------------------------- memories
  localparam int PARAM_W     = 192;                // parameter memory word
  localparam int ACT_W       = 32;                 // activation memory word
  localparam int PPM_PARAM_W = 160;                // PPM parameter word (4 lanes)
  localparam int CACHE_BANKS = 27;
  localparam int IA_BANKS    = ROWS;               // PW: one IA bank per PE row
  localparam int W_BANKS     = PARAM_W / DATA_W;   // PW: 24 banks = one 192b word
  localparam int INSTR_W     = 80;

  // ------------------------------------------------------------- encodings
  typedef enum logic [2:0] {
    OP_END  = 3'd0,
    OP_CONV = 3'd1,
    OP_DW   = 3'd2,
    OP_PW   = 3'd3,
    OP_FC   = 3'd4,
    OP_POOL = 3'd5
  } opcode_e;

  // Operand precision: 8b, two packed 4b, or four packed 2b sub-words.
  typedef enum logic [1:0] {
    PREC_8 = 2'd0,
    PREC_4 = 2'd1,
    PREC_2 = 2'd2
  } prec_e;

  // PE accumulation addressing.
  typedef enum logic [0:0] {
    PE_PW   = 1'b0,   // one broadcast IA x 4 weights, RF address = weight index
    PE_LANE = 1'b1    // lane l: IA[l] x W[l], RF address = {grp, l}
  } pe_mode_e;

  // NoC routing pattern.
  typedef enum logic [0:0] {
    NOC_PW = 1'b0,    // IA per row, W tile per column, output = one PE
    NOC_FC = 1'b1     // IA per column, 2 weights per PE, output = row sum
  } noc_mode_e;

  // Post-processing operation.
  typedef enum logic [1:0] {
    PPM_NORMAL  = 2'd0,  // bias + residual + ReLU + quantize
    PPM_AVG_ACC = 2'd1,  // accumulate into parameter buffer
    PPM_MAX_ACC = 2'd2,  // running maximum in parameter buffer
    PPM_POOL_OUT= 2'd3   // ReLU + quantize the buffered value
  } ppm_op_e;

  // ------------------------------------------------------------- records
  typedef struct packed {
    logic [RF_AW-1:0]  idx;   // column inside the n = 16 wide weight tile
    logic [DATA_W-1:0] val;   // signed weight (or packed sub-words)
  } wpair_t;

  // One PPM parameter word: parameters for four consecutive output channels.
  typedef struct packed {
    logic [SIMD-1:0][7:0]        beta;
    logic [SIMD-1:0][7:0]        alpha;
    logic [SIMD-1:0][PSUM_W-1:0] bias;
  } ppm_param_t;

  // 80b layer instruction (opcode in the 3 least significant bits).
  typedef struct packed {
    logic [6:0] oa_base;   // OA base, units of 128 activation words
    logic [6:0] ia_base;   // IA base, units of 128 activation words
    logic       relu_en;
    logic       pool_max;  // POOL: 1 = max, 0 = average
    logic [7:0] theta;     // run-time activation pruning threshold
    logic [1:0] nnz_q;     // non-zeros per weight-tile row = 4*(nnz_q+1)
    logic [1:0] prec;      // prec_e
    logic [1:0] stride;
    logic [1:0] zpad;
    logic [2:0] w_tiles;   // P: groups of COLS*RF_DEPTH = 64 output channels
    logic [9:0] ia_tiles;  // K: groups of ROWS = 3 pixels
    logic [6:0] fw;        // feature-map width
    logic [6:0] fh;        // feature-map height
    logic [8:0] n_ch;      // output channels
    logic [8:0] m_ch;      // input channels
    logic [2:0] opcode;
  } instr_t;

  // Event counters exported by the accelerator.
  typedef struct packed {
    logic [31:0] layers_pw;
    logic [31:0] layers_pool;
    logic [31:0] layers_fc;
    logic [31:0] layers_unsupported;
    logic [31:0] ch_processed;   // PW input channels fed to the array
    logic [31:0] ch_skipped;     // PW input channels skipped (all-zero column)
    logic [31:0] rap_pruned;     // activations zeroed by run-time pruning
    logic [31:0] row_gated;      // PE-row cycles with gated (zero) IA
    logic [31:0] w_loads;        // weight tile loads into the cache
    logic [31:0] w_reuses;       // weight tile loads avoided by cache reuse
    logic [31:0] mac_cycles;     // PW compute cycles
    logic [31:0] oa_words;       // OA words written back
  } stats_t;

endpackage
