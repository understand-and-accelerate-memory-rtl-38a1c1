// relevancy_retrieval_kernel: the fused Compute-Relevancy + Retrieval kernel.
//
// In the heterogeneous LLM-inference system the GPU prepares memory (for sparse
// attention, compressed key vectors) and applies the retrieved memory, while this
// kernel scores every stored key against the current query and returns the indices
// of the most relevant ones. Only indices cross back to the GPU.
//
// Dataflow (all stages valid/ready streams, data driven):
//   key_in -> key_loader -> write_arbiter -> BRAM tier (tokens 0-16383)
//                                         -> URAM tier (tokens 16384-65535)
//                                         -> HBM  tier (tokens >= 65536, ports)
//   q_in   -> query_loader (64 heads + weights)
//   start  -> read_arbiter (token order, all tiers) -> inner_product_engine
//          -> reduction_unit (weighted sum over heads, optional max per group)
//          -> topk_retriever (running top-k or threshold) -> idx_out
//   post_in -> bm25_scorer (RAG: BM25 over document postings) -> topk_retriever
//
// The score source is chosen per search (cfg.src): key vectors against the
// multi-head query (sparse attention), or BM25 over the postings of the query's
// terms (RAG); both feed the same retriever, whose indices go back to the GPU.
//
// Control: `clear` empties the key store (new sequence). Keys may be appended at
// any time (prefill: the whole prompt; decode: one per token). A query is loaded
// as HEADS beats. `start` latches `cfg` and, once the query is loaded and no key
// is still being written, scans all n_tokens keys; busy stays high until the
// retriever has emitted its indices and pulsed `done`. A start with no keys
// stored (or, for BM25, n_docs = 0) pulses done at once. A BM25 search starts at
// once; its postings are taken from post_* until the beat marked post_last. `overflow` reports keys dropped beyond MAX_TOKENS
// (the host then falls back to GPU-only execution).
//
// The Memory-as-Context kernel (mac_kernel) sits beside the search path with its
// own ports: segment, projection weights and past memory stream in from HBM, the
// output memory embedding streams out. It shares only clock and reset.
//
// HBM is outside this module: the HBM tier's write port and in-order read port are
// brought out, to be connected to the memory controller. Tier sizes, head count,
// k and the token limit follow the published design; key dimension, element width,
// heads-per-cycle and interface shapes are this implementation's choices.
module relevancy_retrieval_kernel
  import mp_pkg::*;
#(
  parameter int unsigned HEADS       = HEADS_DEF,
  parameter int unsigned DIM         = DIM_DEF,
  parameter int unsigned ELEM_W      = ELEM_W_DEF,
  parameter int unsigned HP          = HP_DEF,
  parameter int unsigned BRAM_TOKENS = BRAM_TOKENS_DEF,
  parameter int unsigned URAM_TOKENS = URAM_TOKENS_DEF,
  parameter int unsigned MAX_TOKENS  = MAX_TOKENS_DEF,
  parameter int unsigned K_MAX       = K_MAX_DEF,
  parameter int unsigned FIFO_DEPTH  = 8,
  parameter int unsigned NDOCS       = NDOCS_DEF,
  parameter int unsigned MAC_D       = 128,
  parameter int unsigned MAC_SEG_LEN = 1024,
  parameter int unsigned MAC_NMEM    = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // control
  input  logic                     clear,
  input  logic                     start,
  input  kcfg_t                    cfg,
  output logic                     busy,
  output logic                     done,
  output tok_t                     n_tokens,
  output logic                     overflow,
  // new keys
  input  logic                     key_in_valid,
  output logic                     key_in_ready,
  input  logic [DIM*ELEM_W-1:0]    key_in_data,
  // query beats (one head per beat)
  input  logic                     q_in_valid,
  output logic                     q_in_ready,
  input  logic [DIM*ELEM_W-1:0]    q_in_data,
  input  logic signed [WGT_W-1:0]  q_in_weight,
  // HBM key tier
  output logic                     hbm_wr_valid,
  input  logic                     hbm_wr_ready,
  output tok_t                     hbm_wr_addr,
  output logic [DIM*ELEM_W-1:0]    hbm_wr_data,
  output logic                     hbm_rd_req_valid,
  input  logic                     hbm_rd_req_ready,
  output tok_t                     hbm_rd_req_addr,
  input  logic                     hbm_rd_resp_valid,
  input  logic [DIM*ELEM_W-1:0]    hbm_rd_resp_data,
  // BM25: per-document length normalisation (written when the corpus is prepared)
  input  logic                     norm_we,
  input  logic [$clog2(NDOCS)-1:0] norm_addr,
  input  logic [15:0]              norm_data,
  // BM25: postings of the query's terms, read from HBM
  input  logic                     post_valid,
  output logic                     post_ready,
  input  tok_t                     post_doc,
  input  logic [15:0]              post_tf,
  input  logic [15:0]              post_idf,
  input  logic [7:0]               post_qtf,
  input  logic                     post_last,
  // Memory-as-Context kernel (independent of the search path)
  input  logic                     mac_start,
  input  logic [15:0]              mac_n_mem,
  input  logic [31:0]              mac_scale,
  output logic                     mac_busy,
  output logic                     mac_done,
  input  logic                     mac_seg_valid,
  output logic                     mac_seg_ready,
  input  logic [MAC_D*8-1:0]       mac_seg_data,
  input  logic                     mac_w_valid,
  output logic                     mac_w_ready,
  input  logic [MAC_D*8-1:0]       mac_w_data,
  input  logic                     mac_mem_valid,
  output logic                     mac_mem_ready,
  input  logic [MAC_D*8-1:0]       mac_mem_data,
  output logic                     mac_out_valid,
  input  logic                     mac_out_ready,
  output logic [MAC_D*8-1:0]       mac_out_data,
  // retrieved indices
  output logic                     idx_valid,
  input  logic                     idx_ready,
  output tok_t                     idx_index,
  output score_t                   idx_score
);
  localparam int unsigned KEY_W = DIM * ELEM_W;
  localparam int unsigned DOT_W = 2 * ELEM_W + $clog2(DIM) + 1;
  localparam int unsigned GW    = $clog2(HEADS / HP + 1);

  // ---------------- key write path ----------------
  logic             kl_valid, kl_ready, kl_idle;
  tok_t             kl_token;
  logic [KEY_W-1:0] kl_key;

  logic                           bram_we, uram_we;
  logic [$clog2(BRAM_TOKENS)-1:0] bram_waddr, bram_raddr;
  logic [$clog2(URAM_TOKENS)-1:0] uram_waddr, uram_raddr;
  logic [KEY_W-1:0]               bram_wdata, uram_wdata, bram_rdata, uram_rdata;
  logic                           bram_re, uram_re;

  key_loader #(.KEY_W(KEY_W), .MAX_TOKENS(MAX_TOKENS)) u_key_loader (
    .clk, .rst_n, .clear,
    .key_in_valid, .key_in_ready, .key_in_data,
    .wr_valid(kl_valid), .wr_ready(kl_ready), .wr_token(kl_token), .wr_key(kl_key),
    .n_tokens, .overflow, .idle(kl_idle)
  );

  write_arbiter #(.KEY_W(KEY_W), .BRAM_TOKENS(BRAM_TOKENS), .URAM_TOKENS(URAM_TOKENS))
  u_write_arbiter (
    .clk, .rst_n,
    .in_valid(kl_valid), .in_ready(kl_ready), .in_token(kl_token), .in_key(kl_key),
    .bram_we, .bram_waddr, .bram_wdata,
    .uram_we, .uram_waddr, .uram_wdata,
    .hbm_wr_valid, .hbm_wr_ready, .hbm_wr_addr, .hbm_wr_data
  );

  key_sram #(.DEPTH(BRAM_TOKENS), .W(KEY_W)) u_bram (
    .clk, .rst_n, .we(bram_we), .waddr(bram_waddr), .wdata(bram_wdata),
    .re(bram_re), .raddr(bram_raddr), .rdata(bram_rdata), .rvalid()
  );

  key_sram #(.DEPTH(URAM_TOKENS), .W(KEY_W)) u_uram (
    .clk, .rst_n, .we(uram_we), .waddr(uram_waddr), .wdata(uram_wdata),
    .re(uram_re), .raddr(uram_raddr), .rdata(uram_rdata), .rvalid()
  );

  // ---------------- control ----------------
  typedef enum logic [1:0] {C_IDLE, C_WAIT, C_RUN} cstate_e;
  cstate_e cstate;
  kcfg_t   cfg_r;
  logic    q_loaded, go, go_ip, go_bm, ra_busy, tk_busy, tk_done, bm_busy;
  logic    empty_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate     <= C_IDLE;
      cfg_r      <= '0;
      empty_done <= 1'b0;
    end else begin
      empty_done <= 1'b0;
      unique case (cstate)
        C_IDLE: if (start) begin
          cfg_r  <= cfg;
          cstate <= C_WAIT;
        end
        C_WAIT: if (cfg_r.src == SRC_BM25) begin
          if (cfg_r.n_docs == '0) begin
            empty_done <= 1'b1;
            cstate     <= C_IDLE;
          end else begin
            cstate <= C_RUN;
          end
        end else if (q_loaded && kl_idle && !clear) begin
          if (n_tokens == '0) begin
            empty_done <= 1'b1;
            cstate     <= C_IDLE;
          end else begin
            cstate <= C_RUN;
          end
        end
        C_RUN: if (tk_done) cstate <= C_IDLE;
        default: cstate <= C_IDLE;
      endcase
    end
  end

  assign go_ip = (cstate == C_WAIT) && (cfg_r.src == SRC_INNER) && q_loaded && kl_idle &&
                 !clear && (n_tokens != '0);
  assign go_bm = (cstate == C_WAIT) && (cfg_r.src == SRC_BM25) && (cfg_r.n_docs != '0);
  assign go    = go_ip || go_bm;
  assign busy = (cstate != C_IDLE);
  assign done = tk_done || empty_done;

  // ---------------- query ----------------
  logic [GW-1:0]                 q_group;
  logic [HP-1:0][KEY_W-1:0]      q_heads;
  logic [HEADS-1:0][WGT_W-1:0]   weights;

  query_loader #(.HEADS(HEADS), .DIM(DIM), .ELEM_W(ELEM_W), .HP(HP)) u_query_loader (
    .clk, .rst_n, .hold(cstate != C_IDLE),
    .q_in_valid, .q_in_ready, .q_in_data, .q_in_weight,
    .loaded(q_loaded),
    .rd_group(q_group), .rd_q(q_heads), .weights
  );

  // ---------------- scan path ----------------
  logic             k_valid, k_ready, k_last;
  tok_t             k_token;
  logic [KEY_W-1:0] k_data;

  read_arbiter #(.KEY_W(KEY_W), .BRAM_TOKENS(BRAM_TOKENS), .URAM_TOKENS(URAM_TOKENS),
                 .FIFO_DEPTH(FIFO_DEPTH)) u_read_arbiter (
    .clk, .rst_n, .start(go_ip), .n_tokens, .busy(ra_busy),
    .bram_re, .bram_raddr, .bram_rdata,
    .uram_re, .uram_raddr, .uram_rdata,
    .hbm_rd_req_valid, .hbm_rd_req_ready, .hbm_rd_req_addr,
    .hbm_rd_resp_valid, .hbm_rd_resp_data,
    .key_valid(k_valid), .key_ready(k_ready), .key_token(k_token),
    .key_data(k_data), .key_last(k_last)
  );

  logic                   p_valid, p_ready, p_key_end, p_last;
  tok_t                   p_token;
  logic [GW-1:0]          p_group;
  logic [HP-1:0][DOT_W-1:0] p_dots;

  inner_product_engine #(.HEADS(HEADS), .DIM(DIM), .ELEM_W(ELEM_W), .HP(HP), .DOT_W(DOT_W))
  u_inner_product_engine (
    .clk, .rst_n,
    .key_valid(k_valid), .key_ready(k_ready), .key_token(k_token),
    .key_data(k_data), .key_last(k_last),
    .q_group, .q_heads,
    .out_valid(p_valid), .out_ready(p_ready), .out_token(p_token), .out_group(p_group),
    .out_dots(p_dots), .out_key_end(p_key_end), .out_last(p_last)
  );

  logic        s_valid, s_ready, r_valid, r_ready;
  score_beat_t s_beat, r_beat;

  reduction_unit #(.HEADS(HEADS), .HP(HP), .DOT_W(DOT_W)) u_reduction_unit (
    .clk, .rst_n, .start(go_ip), .group_len(cfg_r.group_len), .weights,
    .in_valid(p_valid), .in_ready(p_ready), .in_group(p_group), .in_dots(p_dots),
    .in_key_end(p_key_end), .in_last(p_last),
    .out_valid(r_valid), .out_ready(r_ready), .out_beat(r_beat)
  );

  // ---------------- BM25 scoring path ----------------
  logic        b_valid, b_ready;
  score_beat_t b_beat;

  bm25_scorer #(.NDOCS(NDOCS)) u_bm25_scorer (
    .clk, .rst_n, .start(go_bm), .n_docs(cfg_r.n_docs), .k1p1(cfg_r.k1p1),
    .norm_we, .norm_addr, .norm_data,
    .post_valid, .post_ready, .post_doc, .post_tf, .post_idf, .post_qtf, .post_last,
    .out_valid(b_valid), .out_ready(b_ready), .out_beat(b_beat), .busy(bm_busy)
  );

  // score source select
  always_comb begin
    if (cfg_r.src == SRC_BM25) begin
      s_valid = b_valid;
      s_beat  = b_beat;
    end else begin
      s_valid = r_valid;
      s_beat  = r_beat;
    end
    b_ready = (cfg_r.src == SRC_BM25)  && s_ready;
    r_ready = (cfg_r.src == SRC_INNER) && s_ready;
  end

  topk_retriever #(.K_MAX(K_MAX)) u_topk_retriever (
    .clk, .rst_n, .start(go),
    .sel_mode(cfg_r.sel_mode), .k(cfg_r.k), .threshold(cfg_r.threshold),
    .in_valid(s_valid), .in_ready(s_ready), .in_beat(s_beat),
    .out_valid(idx_valid), .out_ready(idx_ready), .out_index(idx_index),
    .out_score(idx_score), .done(tk_done), .busy(tk_busy), .n_replace()
  );

  // ---------------- Memory-as-Context kernel ----------------
  mac_kernel #(.D(MAC_D), .EW(8), .SEG_LEN(MAC_SEG_LEN), .NMEM(MAC_NMEM)) u_mac_kernel (
    .clk, .rst_n, .start(mac_start), .n_mem(mac_n_mem), .scale(mac_scale),
    .busy(mac_busy), .done(mac_done),
    .seg_valid(mac_seg_valid), .seg_ready(mac_seg_ready), .seg_data(mac_seg_data),
    .w_valid(mac_w_valid), .w_ready(mac_w_ready), .w_data(mac_w_data),
    .mem_valid(mac_mem_valid), .mem_ready(mac_mem_ready), .mem_data(mac_mem_data),
    .out_valid(mac_out_valid), .out_ready(mac_out_ready), .out_data(mac_out_data)
  );

  a_done_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    tk_done |-> cstate == C_RUN);

endmodule
