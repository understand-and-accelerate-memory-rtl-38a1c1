// tb_relevancy_retrieval_kernel: end-to-end test of the fused relevancy/retrieval
// kernel at reduced sizes (8 heads of 8 elements, 4 heads per cycle, tiers of 16
// BRAM and 32 URAM tokens, the rest in a stalling HBM model, k up to 8, 100-token
// limit).
//
// Scenarios: prefill of 70 keys across all three tiers and a top-k search; a
// decode step (one more key, a new query); threshold selection; page-wise max
// over groups of 4 keys; filling past the token limit (overflow); a search with
// no keys; BM25 document scoring (64-document store) with top-k and threshold
// selection on the same retriever; Memory-as-Context segments (no memory, one
// memory embedding, four equal ones: the output must equal that embedding).
// Every selection is checked against scores computed here from the same
// keys and query. Each mechanism is counted and a mechanism never seen counts as
// a failure.
module tb_relevancy_retrieval_kernel;
  import mp_pkg::*;
  localparam int unsigned H = 8, D = 8, EW = 8, HP = 4;
  localparam int unsigned BT = 16, UT = 32, MAXT = 100, KM = 8;
  localparam int unsigned KW = D * EW;
  localparam int unsigned ND = 64;

  logic clk = 0, rst_n = 0, clear = 0, start = 0;
  kcfg_t cfg = '0;
  logic busy, done, overflow;
  tok_t n_tokens;
  logic key_in_valid = 0, key_in_ready;
  logic [KW-1:0] key_in_data = '0;
  logic q_in_valid = 0, q_in_ready;
  logic [KW-1:0] q_in_data = '0;
  logic signed [WGT_W-1:0] q_in_weight = '0;
  logic hbm_wr_valid, hbm_wr_ready, hbm_rd_req_valid, hbm_rd_req_ready, hbm_rd_resp_valid;
  tok_t hbm_wr_addr, hbm_rd_req_addr;
  logic [KW-1:0] hbm_wr_data, hbm_rd_resp_data;
  logic idx_valid, idx_ready = 0;
  tok_t idx_index;
  score_t idx_score;

  logic norm_we = 0;
  logic [$clog2(ND)-1:0] norm_addr = '0;
  logic [15:0] norm_data = '0, post_tf = '0, post_idf = '0;
  logic post_valid = 0, post_ready, post_last = 0;
  tok_t post_doc = '0;
  logic [7:0] post_qtf = '0;

  localparam int unsigned MD = 8, MSL = 16, MNM = 4;
  logic mac_start = 0, mac_busy, mac_done;
  logic [15:0] mac_n_mem = '0;
  logic [31:0] mac_scale = '0;
  logic mac_seg_valid = 0, mac_seg_ready, mac_w_valid = 0, mac_w_ready, mac_mem_valid = 0, mac_mem_ready;
  logic [MD*8-1:0] mac_seg_data = '0, mac_w_data = '0, mac_mem_data = '0, mac_out_data;
  logic mac_out_valid, mac_out_ready = 1;

  relevancy_retrieval_kernel #(.HEADS(H), .DIM(D), .ELEM_W(EW), .HP(HP), .BRAM_TOKENS(BT),
    .URAM_TOKENS(UT), .MAX_TOKENS(MAXT), .K_MAX(KM), .FIFO_DEPTH(4), .NDOCS(ND),
    .MAC_D(MD), .MAC_SEG_LEN(MSL), .MAC_NMEM(MNM)) dut (.*);

  hbm_model #(.W(KW), .LAT(7), .STALL(1)) u_hbm (.clk, .rst_n,
    .wr_valid(hbm_wr_valid), .wr_ready(hbm_wr_ready), .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data),
    .rd_req_valid(hbm_rd_req_valid), .rd_req_ready(hbm_rd_req_ready), .rd_req_addr(hbm_rd_req_addr),
    .rd_resp_valid(hbm_rd_resp_valid), .rd_resp_data(hbm_rd_resp_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- reference data ----------------
  logic [KW-1:0] keys [$];
  logic [KW-1:0] q [H];
  logic signed [WGT_W-1:0] w [H];

  function automatic longint key_score(int t);
    longint s = 0;
    for (int h = 0; h < H; h++) begin
      longint dp = 0;
      for (int d = 0; d < D; d++)
        dp += longint'($signed(q[h][d*EW +: EW])) * longint'($signed(keys[t][d*EW +: EW]));
      s += dp * longint'(w[h]);
    end
    return s;
  endfunction

  // ---------------- mechanism counters ----------------
  int m_hbm_tier_wr = 0, m_hbm_wr_stall = 0, m_hbm_rd = 0, m_idx_stall = 0;
  int m_bram_rd = 0, m_uram_rd = 0, m_replace = 0, m_thresh = 0, m_group = 0;
  int m_overflow = 0, m_empty = 0, m_decode = 0, m_bm25_post = 0, m_bm25_sel = 0, m_mac = 0;
  always @(posedge clk) if (rst_n) begin
    if (hbm_wr_valid && hbm_wr_ready) m_hbm_tier_wr++;
    if (hbm_wr_valid && !hbm_wr_ready) m_hbm_wr_stall++;
    if (hbm_rd_resp_valid) m_hbm_rd++;
    if (idx_valid && !idx_ready) m_idx_stall++;
    if (dut.bram_re) m_bram_rd++;
    if (dut.uram_re) m_uram_rd++;
    if (post_valid && post_ready) m_bm25_post++;
  end

  // ---------------- drivers ----------------
  task automatic push_key(logic [KW-1:0] kd);
    bit hs;
    @(negedge clk);
    key_in_valid = 1; key_in_data = kd;
    do begin #1 hs = key_in_ready; @(posedge clk); end while (!hs);
    #1 key_in_valid = 0;
  endtask

  task automatic add_keys(int n);
    for (int i = 0; i < n; i++) begin
      logic [KW-1:0] kd = {$urandom, $urandom};
      if (keys.size() < MAXT) keys.push_back(kd);
      push_key(kd);
    end
  endtask

  task automatic load_query();
    bit hs;
    for (int h = 0; h < H; h++) begin
      q[h] = {$urandom, $urandom}; w[h] = $urandom;
      @(negedge clk);
      q_in_valid = 1; q_in_data = q[h]; q_in_weight = w[h];
      do begin #1 hs = q_in_ready; @(posedge clk); end while (!hs);
      #1 q_in_valid = 0;
    end
  endtask

  int   sel_idx [$];
  longint sel_sc [$];
  int   p_ready = 100;
  bit   done_seen;
  always @(posedge clk) begin
    if (idx_valid && idx_ready) begin sel_idx.push_back(int'(idx_index)); sel_sc.push_back(longint'(idx_score)); end
    if (done) done_seen = 1;
    idx_ready <= ($urandom_range(0, 99) < p_ready);
  end

  // run a search and check its result
  task automatic search(sel_mode_e m, int kk, longint thr, int gl);
    longint us [];
    int n = keys.size();
    int nu = (n + gl - 1) / gl;
    int want;
    bit chosen [];
    longint min_sel = 64'h7fffffffffffffff, max_uns = -64'h7fffffffffffffff;
    us = new[nu];
    for (int u = 0; u < nu; u++) begin
      us[u] = key_score(u * gl);
      for (int t = u * gl; t < (u + 1) * gl && t < n; t++)
        if (key_score(t) > us[u]) us[u] = key_score(t);
    end
    sel_idx.delete(); sel_sc.delete(); done_seen = 0;
    @(negedge clk);
    cfg.src = SRC_INNER; cfg.sel_mode = m; cfg.k = kk; cfg.threshold = thr; cfg.group_len = gl; start = 1;
    @(negedge clk) start = 0;
    while (!done_seen) @(negedge clk);
    repeat (2) @(negedge clk);
    check(!busy, "idle after done");
    check(n_tokens == tok_t'(n), "n_tokens matches keys sent");
    if (m == SEL_TOPK) want = (nu < kk) ? nu : kk;
    else begin want = 0; foreach (us[u]) if (us[u] > thr) want++; end
    check(sel_idx.size() == want, $sformatf("selected %0d want %0d", sel_idx.size(), want));
    chosen = new[nu];
    foreach (sel_idx[i]) begin
      check(sel_idx[i] < nu && !chosen[sel_idx[i]], "distinct valid index");
      if (sel_idx[i] < nu) begin
        chosen[sel_idx[i]] = 1;
        check(sel_sc[i] == us[sel_idx[i]], $sformatf("score of %0d: %0d want %0d", sel_idx[i], sel_sc[i], us[sel_idx[i]]));
      end
    end
    foreach (us[u]) if (chosen[u]) begin if (us[u] < min_sel) min_sel = us[u]; end
                    else if (us[u] > max_uns) max_uns = us[u];
    if (m == SEL_TOPK) begin
      check(want == 0 || min_sel >= max_uns, "top-k separation");
      m_replace += int'(dut.u_topk_retriever.n_replace);
    end else begin
      foreach (us[u]) check(chosen[u] == (us[u] > thr), "threshold rule");
      m_thresh += want;
    end
    if (gl > 1) m_group++;
  endtask

  // BM25 search over the first nd documents: random postings for nt terms, then
  // the selection is checked against BM25 scores computed here
  longint kdoc [ND];
  task automatic bm25_search(sel_mode_e m, int kk, longint thr, int nd, int nt);
    longint ref_sc [];
    int docs [$];
    bit chosen [];
    int want;
    longint min_sel = 64'h7fffffffffffffff, max_uns = -64'h7fffffffffffffff;
    bit hs;
    ref_sc = new[nd];
    sel_idx.delete(); sel_sc.delete(); done_seen = 0;
    @(negedge clk);
    cfg = '0; cfg.src = SRC_BM25; cfg.sel_mode = m; cfg.k = kk; cfg.threshold = thr;
    cfg.group_len = 1; cfg.n_docs = nd; cfg.k1p1 = 16'd563; start = 1;   // k1 = 1.2
    @(negedge clk) start = 0;
    for (int t = 0; t < nt; t++) begin
      int idf = $urandom_range(10, 3000), qtf = $urandom_range(1, 2);
      docs.delete();
      for (int d = 0; d < nd; d++) if ($urandom_range(0, 3) == 0) docs.push_back(d);
      foreach (docs[i]) begin
        int tf = $urandom_range(1, 30);
        ref_sc[docs[i]] += (longint'(idf) * 563 * tf * qtf) / ((longint'(tf) << 8) + kdoc[docs[i]]);
        @(negedge clk);
        post_valid = 1; post_doc = docs[i]; post_tf = tf; post_idf = idf; post_qtf = qtf;
        post_last = (t == nt - 1) && (i == docs.size() - 1);
        do begin #1 hs = post_ready; @(posedge clk); end while (!hs);
        #1 post_valid = 0;
      end
    end
    while (!done_seen) @(negedge clk);
    repeat (2) @(negedge clk);
    check(!busy, "idle after BM25 search");
    if (m == SEL_TOPK) want = (nd < kk) ? nd : kk;
    else begin want = 0; foreach (ref_sc[d]) if (ref_sc[d] > thr) want++; end
    check(sel_idx.size() == want, $sformatf("BM25 selected %0d want %0d", sel_idx.size(), want));
    chosen = new[nd];
    foreach (sel_idx[i]) begin
      check(sel_idx[i] < nd && !chosen[sel_idx[i]], "BM25 distinct valid index");
      if (sel_idx[i] < nd) begin
        chosen[sel_idx[i]] = 1;
        check(sel_sc[i] == ref_sc[sel_idx[i]],
              $sformatf("BM25 score of doc %0d: %0d want %0d", sel_idx[i], sel_sc[i], ref_sc[sel_idx[i]]));
      end
    end
    foreach (ref_sc[d]) if (chosen[d]) begin if (ref_sc[d] < min_sel) min_sel = ref_sc[d]; end
                        else if (ref_sc[d] > max_uns) max_uns = ref_sc[d];
    if (m == SEL_TOPK) check(min_sel >= max_uns, "BM25 top-k separation");
    else foreach (ref_sc[d]) check(chosen[d] == (ref_sc[d] > thr), "BM25 threshold rule");
    m_bm25_sel += sel_idx.size();
  endtask

  // one Memory-as-Context segment: nm copies of one memory embedding; the blend
  // of equal embeddings is that embedding, and no memory gives zero
  task automatic mac_segment(int nm);
    logic [MD*8-1:0] mv = {$urandom, $urandom};
    logic [MD*8-1:0] want = (nm == 0) ? '0 : mv;
    logic [MD*8-1:0] got;
    bit hs;
    @(negedge clk);
    mac_n_mem = nm; mac_scale = 32'd300; mac_start = 1;
    @(negedge clk) mac_start = 0;
    for (int t = 0; t < MSL; t++) begin
      @(negedge clk); mac_seg_valid = 1; mac_seg_data = {$urandom, $urandom};
      do begin #1 hs = mac_seg_ready; @(posedge clk); end while (!hs);
      #1 mac_seg_valid = 0;
    end
    for (int r = 0; r < MD; r++) begin
      @(negedge clk); mac_w_valid = 1; mac_w_data = {$urandom, $urandom};
      do begin #1 hs = mac_w_ready; @(posedge clk); end while (!hs);
      #1 mac_w_valid = 0;
    end
    for (int i = 0; i < nm; i++) begin
      @(negedge clk); mac_mem_valid = 1; mac_mem_data = mv;
      do begin #1 hs = mac_mem_ready; @(posedge clk); end while (!hs);
      #1 mac_mem_valid = 0;
    end
    do @(posedge clk); while (!(mac_out_valid && mac_out_ready));
    got = mac_out_data;
    check(got == want, $sformatf("MaC output %h want %h (n_mem %0d)", got, want, nm));
    @(negedge clk);
    check(!mac_busy, "MaC idle after output");
    m_mac++;
  endtask

  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // empty search
    load_query();
    @(negedge clk) begin done_seen = 0; cfg = '0; cfg.k = 4; cfg.group_len = 1; start = 1; end
    @(negedge clk) start = 0;
    begin
      int tmo = 0;
      while (!done_seen && tmo < 20) begin @(negedge clk); tmo++; end
      check(done_seen, "empty search completes");
      if (done_seen) m_empty++;
    end
    // prefill across all tiers
    add_keys(70);
    search(SEL_TOPK, 8, 0, 1);
    p_ready = 40;
    search(SEL_TOPK, 5, 0, 1);
    // decode step: one new key, new query
    add_keys(1); m_decode++;
    load_query();
    search(SEL_TOPK, 8, 0, 1);
    // threshold selection: keep every positive score
    search(SEL_THRESH, 0, 0, 1);
    // page-wise max over groups of 4 keys
    p_ready = 100;
    search(SEL_TOPK, 4, 0, 4);
    // overflow: 29 keys reach the limit of 100, 5 more are dropped
    add_keys(34);
    check(overflow, "overflow flagged past the token limit");
    if (overflow) m_overflow++;
    search(SEL_TOPK, 8, 0, 1);
    // a new sequence after clear
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    check(n_tokens == 0 && !overflow, "clear empties the store");
    keys.delete();
    add_keys(20);
    load_query();
    search(SEL_TOPK, 6, 0, 1);
    // BM25 (RAG): document lengths, then top-k and threshold searches
    for (int d = 0; d < ND; d++) begin
      @(negedge clk);
      kdoc[d] = $urandom_range(100, 900);
      norm_we = 1; norm_addr = d; norm_data = kdoc[d];
    end
    @(negedge clk) norm_we = 0;
    p_ready = 50;
    bm25_search(SEL_TOPK, 8, 0, 40, 3);
    bm25_search(SEL_THRESH, 0, 400, 64, 4);
    // Memory as Context
    mac_segment(0);
    mac_segment(1);
    mac_segment(MNM);
    // the inner-product path still works after BM25 use
    p_ready = 100;
    search(SEL_TOPK, 6, 0, 1);

    $display("mechanisms: bram_rd=%0d uram_rd=%0d hbm_tier_wr=%0d hbm_wr_stall=%0d hbm_rd=%0d idx_stall=%0d",
             m_bram_rd, m_uram_rd, m_hbm_tier_wr, m_hbm_wr_stall, m_hbm_rd, m_idx_stall);
    $display("mechanisms: replace=%0d thresh=%0d group=%0d overflow=%0d empty=%0d decode=%0d hbm_rd_stall=%0d",
             m_replace, m_thresh, m_group, m_overflow, m_empty, m_decode, u_hbm.n_rd_stall);
    $display("mechanisms: bm25_postings=%0d bm25_selected=%0d mac_segments=%0d", m_bm25_post, m_bm25_sel, m_mac);
    check(m_bram_rd > 0, "BRAM tier read");
    check(m_uram_rd > 0, "URAM tier read");
    check(m_hbm_tier_wr > 0 && m_hbm_rd > 0, "HBM tier written and read");
    check(m_hbm_wr_stall > 0 && u_hbm.n_rd_stall > 0, "HBM stalls");
    check(m_idx_stall > 0, "output back-pressure");
    check(m_replace > 0, "top-k replacement of the current minimum");
    check(m_thresh > 0, "threshold selection");
    check(m_group > 0, "group max reduction");
    check(m_overflow > 0, "overflow");
    check(m_empty > 0, "empty search");
    check(m_decode > 0, "decode append");
    check(m_bm25_post > 0 && m_bm25_sel > 0, "BM25 scoring and selection");
    check(m_mac > 0, "Memory-as-Context segment");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
