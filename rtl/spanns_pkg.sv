// spanns_pkg: sizes, data layouts and record types shared by the SpANNS
// sparse-vector ANNS accelerator.
//
// Numbers that come from the paper: 64-byte memory beats, 16-bit fixed-point
// query values, a 256K-entry (1 MB) level-1 index, 8 channels x 8 ranks with an
// L2Inv : F-Idx DIMM ratio of 1 : 3, and five simultaneously activated
// clusters. Everything else here (index widths, how a silhouette, a pointer
// list and a forward-index record are laid out in 64-byte beats, score width,
// K) is this implementation's own choice and is marked as such.
package spanns_pkg;

  // ---- widths --------------------------------------------------------------
  localparam int unsigned BEAT_W   = 512;  // 64 B DRAM beat (paper)
  localparam int unsigned COL_W    = 32;   // dimension index (own choice)
  localparam int unsigned VAL_W    = 16;   // 16-bit fixed point (paper)
  localparam int unsigned ID_W     = 32;   // record identifier (own choice)
  localparam int unsigned SCORE_W  = 40;   // inner-product accumulator (own choice)
  localparam int unsigned ADDR_W   = 32;   // DRAM address in 64 B beats (own choice)
  localparam int unsigned LEN_W    = 8;    // beats per read request (own choice)

  // ---- query ---------------------------------------------------------------
  localparam int unsigned QMAX     = 64;   // non-zeros held per query (own choice, paper: 10-50 typical)
  localparam int unsigned QIDX_W   = $clog2(QMAX + 1);
  localparam int unsigned FRAC     = 10;   // fraction bits of quantized values (own choice)

  // ---- level-1 index entry: {ncl, l2_base} -------------------------------------
  localparam int unsigned L1_ENTRIES = 262144; // 256K entries (paper)
  localparam int unsigned L1_AW      = 18;
  localparam int unsigned NCL_W      = 8;
  localparam int unsigned L2BASE_W   = 24;

  typedef struct packed {
    logic [NCL_W-1:0]    ncl;      // clusters in this dimension's level-2 list
    logic [L2BASE_W-1:0] l2_base;  // beat address of the first silhouette
  } l1_entry_t;

  // ---- silhouette beat (one cluster) ------------------------------------------
  // bits [ELL_W*48-1:0] : ELL_W pairs {col[31:0], val[15:0]}, pair e at e*48
  // bits [415:384]      : beat address of the cluster's record-pointer list
  // bits [431:416]      : number of record pointers in the list
  localparam int unsigned ELL_W    = 8;
  localparam int unsigned PAIR_W   = COL_W + VAL_W;
  localparam int unsigned SIL_PTR_LSB = 384;
  localparam int unsigned SIL_LEN_LSB = 416;
  localparam int unsigned PLEN_W   = 16;

  // ---- pointer list: 16 record ids per beat -------------------------------------
  localparam int unsigned IDS_PER_BEAT = BEAT_W / ID_W;

  // ---- forward-index record in its 8 KB bin ----------------------------------------
  // beat 0     : {.., id[47:16], nnz[15:0]}
  // beats 1..C : 16 column indices per beat, C = ceil(nnz/16)
  // then V     : 32 values per beat,         V = ceil(nnz/32)
  localparam int unsigned COLS_PER_BEAT = BEAT_W / COL_W;   // 16
  localparam int unsigned VALS_PER_BEAT = BEAT_W / VAL_W;   // 32
  localparam int unsigned BIN_BEATS     = 8192 / 64;        // 8 KB bin (paper)
  localparam int unsigned RNNZ_W        = 16;

  // ---- system -------------------------------------------------------------------
  localparam int unsigned N_CH     = 8;    // channels (paper, Table I)
  localparam int unsigned RANKS    = 8;    // ranks per channel (paper, Table I)
  localparam int unsigned N_L2     = 2;    // L2Inv DIMMs (1 : 3 ratio of 8 channels)
  localparam int unsigned N_FD     = 6;    // F-Idx DIMMs
  localparam int unsigned FD_W     = 3;
  localparam int unsigned RK_W     = 3;
  localparam int unsigned N_ACT    = 5;    // activated clusters (paper, Sec. VI-C)
  localparam int unsigned TOPK     = 10;   // K per lane (own choice, Recall@10)
  localparam int unsigned LANES    = 2;    // top-K lanes (as drawn)

  // translated candidate pointer, as sent from an L2Inv DIMM towards the F-Idx ranks
  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [FD_W-1:0]   dimm;     // F-Idx DIMM
    logic [RK_W-1:0]   rank;     // rank in that DIMM
    logic [ADDR_W-1:0] addr;     // beat address of the record's bin
  } cand_t;

  typedef struct packed {
    logic signed [SCORE_W-1:0] score;
    logic [ID_W-1:0]           id;
  } scored_t;

  localparam int unsigned TAG_W = $clog2(N_ACT + 1);  // delay-queue tag of a dispatched record

  // one results-buffer entry of a rank compute unit: hit mask and the operands
  // of the multiply-accumulate, position i of each vector belonging together
  typedef struct packed {
    logic                              swap;   // 1: record-driven (||r||_0 < ||q||_0)
    logic [QIDX_W-1:0]                 len;    // positions to accumulate
    logic [QMAX-1:0]                   hit;    // hit mask
    logic [QMAX-1:0][VAL_W-1:0]        prim;   // record values (record-driven mode only)
    logic [QMAX-1:0][VAL_W-1:0]        sec;    // matched values from the other vector
    logic [ID_W-1:0]                   id;
    logic [TAG_W-1:0]                  tag;
  } rb_entry_t;

  function automatic logic [ID_W-1:0] pid(input logic [BEAT_W-1:0] beat, input int unsigned i);
    return beat[i*ID_W +: ID_W];
  endfunction

endpackage
