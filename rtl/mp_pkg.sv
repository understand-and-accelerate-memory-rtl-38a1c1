// mp_pkg: types and constants shared by the fused Compute-Relevancy / Retrieval
// kernel.
//
// The kernel scores every stored key vector against a multi-head query and keeps
// the indices of the best-scoring keys. Keys live in three storage tiers chosen by
// token ID: BRAM for tokens 0-16383, URAM for 16384-65535 and HBM from 65536 on.
// Those tier boundaries, the 64 query heads, k = 2048 and the 1M-token limit are
// the published figures of the design; the element width (signed 8-bit), the key
// dimension (128), the score and token-ID widths and the stream formats below are
// choices of this implementation.
package mp_pkg;

  // ---- sizes that follow the published design ----
  localparam int unsigned HEADS_DEF       = 64;       // query heads of the indexer
  localparam int unsigned BRAM_TOKENS_DEF = 16384;    // BRAM tier: tokens 0-16383
  localparam int unsigned URAM_TOKENS_DEF = 49152;    // URAM tier: tokens 16384-65535
  localparam int unsigned MAX_TOKENS_DEF  = 1048576;  // beyond this: GPU-only fallback
  localparam int unsigned K_MAX_DEF       = 2048;     // top-k list length

  // ---- sizes chosen by this implementation ----
  localparam int unsigned DIM_DEF    = 128;  // elements per key / query head
  localparam int unsigned ELEM_W_DEF = 8;    // signed fixed-point element
  localparam int unsigned WGT_W      = 8;    // signed per-head query weight
  localparam int unsigned HP_DEF     = 16;   // query heads processed per cycle
  localparam int unsigned NDOCS_DEF  = 1048576; // BM25 document score store

  localparam int unsigned TOK_W   = 32;      // token / index width
  localparam int unsigned SCORE_W = 48;      // signed score width

  typedef logic [TOK_W-1:0]          tok_t;
  typedef logic signed [SCORE_W-1:0] score_t;

  // Where a key is stored.
  typedef enum logic [1:0] {
    TIER_BRAM = 2'd0,
    TIER_URAM = 2'd1,
    TIER_HBM  = 2'd2
  } tier_e;

  // How the retriever selects.
  typedef enum logic {
    SEL_TOPK   = 1'b0,   // keep the k best scores, emit after the scan
    SEL_THRESH = 1'b1    // emit every index whose score exceeds the threshold
  } sel_mode_e;

  // One final score per retrieval unit (a key, or a group of keys).
  typedef struct packed {
    tok_t   index;
    score_t score;
    logic   last;      // last score of this scan
  } score_beat_t;

  // Where the scores come from.
  typedef enum logic {
    SRC_INNER = 1'b0,    // key vectors x multi-head query (sparse attention)
    SRC_BM25  = 1'b1     // BM25 over document postings (RAG)
  } score_src_e;

  // Kernel run-time configuration.
  typedef struct packed {
    score_src_e   src;
    sel_mode_e    sel_mode;
    logic [15:0]  k;           // 1 .. K_MAX
    score_t       threshold;   // SEL_THRESH: emit if score > threshold
    logic [15:0]  group_len;   // keys per retrieval unit (1 = per-token scores)
    tok_t         n_docs;      // SRC_BM25: documents to score
    logic [15:0]  k1p1;        // SRC_BM25: k1 + 1, unsigned Q8.8
  } kcfg_t;

  // Tier of a token ID for given tier sizes.
  function automatic tier_e tier_of(tok_t tok, int unsigned bram_t, int unsigned uram_t);
    if (tok < tok_t'(bram_t))               return TIER_BRAM;
    else if (tok < tok_t'(bram_t + uram_t)) return TIER_URAM;
    else                                    return TIER_HBM;
  endfunction

endpackage
