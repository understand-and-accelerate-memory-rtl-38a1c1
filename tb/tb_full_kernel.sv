// tb_full_kernel: one complete operation of the kernel at its default size:
// 64 query heads of 128 elements, BRAM tier 16384 tokens, URAM tier 49152, keys
// beyond 65536 in a stalling HBM model, k = 2048.
//
// A query is loaded, then 65536 + NHBM keys are streamed in (the last NHBM go to
// HBM), and a top-2048 search runs over all of them. The 2048 indices are checked
// against scores computed here as each key is sent: right count, distinct, each
// reported score correct, and no unselected key scoring higher than a selected
// one. Reports the scan's cycle count against the HEADS/HP = 4 cycles per key of
// the inner product engine.
//
// Then one Memory-as-Context segment at full size (1024-token segment, 128-element
// embeddings, 256 past memory embeddings) is checked element by element against
// the kernel's integer arithmetic computed here.
module tb_full_kernel;
  import mp_pkg::*;
  localparam int unsigned H = HEADS_DEF, D = DIM_DEF, EW = ELEM_W_DEF;
  localparam int unsigned KW = D * EW;
  localparam int unsigned NHBM = 256;
  localparam int unsigned N = BRAM_TOKENS_DEF + URAM_TOKENS_DEF + NHBM;
  localparam int unsigned K = K_MAX_DEF;

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
  logic idx_valid, idx_ready = 1;
  tok_t idx_index;
  score_t idx_score;

  // BM25 inputs unused in this test
  logic norm_we = 0;
  logic [$clog2(NDOCS_DEF)-1:0] norm_addr = '0;
  logic [15:0] norm_data = '0, post_tf = '0, post_idf = '0;
  logic post_valid = 0, post_ready, post_last = 0;
  tok_t post_doc = '0;
  logic [7:0] post_qtf = '0;

  // Memory-as-Context kernel at its defaults
  localparam int unsigned MD = 128, MSL = 1024, MNM = 256;
  logic mac_start = 0, mac_busy, mac_done;
  logic [15:0] mac_n_mem = '0;
  logic [31:0] mac_scale = '0;
  logic mac_seg_valid = 0, mac_seg_ready, mac_w_valid = 0, mac_w_ready, mac_mem_valid = 0, mac_mem_ready;
  logic [MD*8-1:0] mac_seg_data = '0, mac_w_data = '0, mac_mem_data = '0, mac_out_data;
  logic mac_out_valid, mac_out_ready = 1;

  relevancy_retrieval_kernel dut (.*);

  hbm_model #(.W(KW), .LAT(20), .STALL(1)) u_hbm (.clk, .rst_n,
    .wr_valid(hbm_wr_valid), .wr_ready(hbm_wr_ready), .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data),
    .rd_req_valid(hbm_rd_req_valid), .rd_req_ready(hbm_rd_req_ready), .rd_req_addr(hbm_rd_req_addr),
    .rd_resp_valid(hbm_rd_resp_valid), .rd_resp_data(hbm_rd_resp_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [KW-1:0] q [H];
  logic signed [WGT_W-1:0] w [H];
  longint sc [N];

  function automatic longint score_of(logic [KW-1:0] kd);
    longint s = 0;
    for (int h = 0; h < H; h++) begin
      longint dp = 0;
      for (int d = 0; d < D; d++)
        dp += longint'($signed(q[h][d*EW +: EW])) * longint'($signed(kd[d*EW +: EW]));
      s += dp * longint'(w[h]);
    end
    return s;
  endfunction

  function automatic logic [KW-1:0] rand_key();
    logic [KW-1:0] r;
    for (int i = 0; i < KW / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  int sel_idx [$];
  longint sel_sc [$];
  bit done_seen = 0;
  longint scan_cycles = 0;
  always @(posedge clk) begin
    if (idx_valid && idx_ready) begin sel_idx.push_back(int'(idx_index)); sel_sc.push_back(longint'(idx_score)); end
    if (done) done_seen = 1;
    if (busy) scan_cycles++;
  end

  function automatic longint mel(logic [MD*8-1:0] v, int d);
    return longint'($signed(v[d*8 +: 8]));
  endfunction

  task automatic mac_full();
    logic [MD*8-1:0] seg [MSL];
    logic [MD*8-1:0] wm [MD];
    logic [MD*8-1:0] mem [MNM];
    longint xbar [MD], q [MD], sc [MNM], acc [MD];
    longint smax = -(64'sd1 <<< 62), spread = 1, scl, wsum = 0;
    logic [MD*8-1:0] got;
    int bad = 0;
    bit hs;
    foreach (seg[t]) seg[t] = rand_key();
    foreach (wm[r]) wm[r] = rand_key();
    foreach (mem[i]) mem[i] = rand_key();
    for (int d = 0; d < MD; d++) begin
      longint sum = 0;
      for (int t = 0; t < MSL; t++) sum += mel(seg[t], d);
      xbar[d] = sum >>> $clog2(MSL);
    end
    for (int r = 0; r < MD; r++) begin
      q[r] = 0;
      for (int j = 0; j < MD; j++) q[r] += mel(wm[r], j) * xbar[j];
    end
    for (int i = 0; i < MNM; i++) begin
      sc[i] = 0;
      for (int d = 0; d < MD; d++) sc[i] += q[d] * mel(mem[i], d);
      if (sc[i] > smax) smax = sc[i];
    end
    for (int i = 0; i < MNM; i++) if (smax - sc[i] > spread) spread = smax - sc[i];
    scl = (64'sd6 <<< 32) / spread;
    if (scl < 1) scl = 1;
    if (scl > 64'sd2147483647) scl = 64'sd2147483647;
    for (int d = 0; d < MD; d++) acc[d] = 0;
    for (int i = 0; i < MNM; i++) begin
      longint y = ((smax - sc[i]) * scl) >>> 16;
      longint n = y >> 16, f = y & 16'hffff;
      longint w = (n >= 17) ? 0 : ((65536 - (f >> 1)) >> n);
      wsum += w;
      for (int d = 0; d < MD; d++) acc[d] += w * mel(mem[i], d);
    end
    @(negedge clk);
    mac_n_mem = MNM; mac_scale = 32'(scl); mac_start = 1;
    @(negedge clk) mac_start = 0;
    fork
      for (int t = 0; t < MSL; t++) begin
        @(negedge clk); mac_seg_valid = 1; mac_seg_data = seg[t];
        do begin #1 hs = mac_seg_ready; @(posedge clk); end while (!hs);
        #1 mac_seg_valid = 0;
      end
      for (int r = 0; r < MD; r++) begin
        bit hw;
        @(negedge clk); mac_w_valid = 1; mac_w_data = wm[r];
        do begin #1 hw = mac_w_ready; @(posedge clk); end while (!hw);
        #1 mac_w_valid = 0;
      end
      for (int i = 0; i < MNM; i++) begin
        bit hm;
        @(negedge clk); mac_mem_valid = 1; mac_mem_data = mem[i];
        do begin #1 hm = mac_mem_ready; @(posedge clk); end while (!hm);
        #1 mac_mem_valid = 0;
      end
    join
    do @(posedge clk); while (!(mac_out_valid && mac_out_ready));
    got = mac_out_data;
    for (int d = 0; d < MD; d++) begin
      longint mag = (acc[d] < 0) ? -acc[d] : acc[d];
      longint qq = (mag + (wsum >> 1)) / wsum;
      if (mel(got, d) != ((acc[d] < 0) ? -qq : qq)) bad++;
    end
    check(bad == 0, $sformatf("MaC output: %0d of %0d elements wrong", bad, MD));
    $display("MaC segment: %0d memory embeddings, weight sum %0d", MNM, wsum);
  endtask

  initial begin
    #40000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit hs;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int h = 0; h < H; h++) begin
      q[h] = rand_key(); w[h] = $urandom;
      @(negedge clk);
      q_in_valid = 1; q_in_data = q[h]; q_in_weight = w[h];
      do begin #1 hs = q_in_ready; @(posedge clk); end while (!hs);
      #1 q_in_valid = 0;
    end
    for (int t = 0; t < N; t++) begin
      logic [KW-1:0] kd = rand_key();
      sc[t] = score_of(kd);
      @(negedge clk);
      key_in_valid = 1; key_in_data = kd;
      do begin #1 hs = key_in_ready; @(posedge clk); end while (!hs);
      #1 key_in_valid = 0;
    end
    $display("loaded %0d keys", N);
    @(negedge clk);
    done_seen = 0; sel_idx.delete(); sel_sc.delete(); scan_cycles = 0;
    cfg.sel_mode = SEL_TOPK; cfg.k = 16'(K); cfg.group_len = 1; start = 1;
    @(negedge clk) start = 0;
    while (!done_seen) @(negedge clk);
    repeat (2) @(negedge clk);
    $display("search: %0d cycles for %0d keys (%0d per key at %0d heads/cycle)",
             scan_cycles, N, H / HP_DEF, HP_DEF);
    check(n_tokens == tok_t'(N), "n_tokens");
    check(!overflow, "no overflow");
    check(scan_cycles >= longint'(N) * (H / HP_DEF), "scan cannot beat the engine rate");
    check(scan_cycles < longint'(N) * (H / HP_DEF) + K + 2000, "scan close to the engine rate");
    check(sel_idx.size() == K, $sformatf("selected %0d want %0d", sel_idx.size(), K));
    begin
      bit chosen [] = new[N];
      longint min_sel = 64'h7fffffffffffffff, max_uns = -64'h7fffffffffffffff;
      int n_hbm_sel = 0, bad = 0;
      foreach (sel_idx[i]) begin
        if (sel_idx[i] >= N || chosen[sel_idx[i]] || sel_sc[i] != sc[sel_idx[i]]) bad++;
        else chosen[sel_idx[i]] = 1;
        if (sel_idx[i] >= BRAM_TOKENS_DEF + URAM_TOKENS_DEF) n_hbm_sel++;
      end
      check(bad == 0, $sformatf("%0d bad indices or scores", bad));
      for (int t = 0; t < N; t++)
        if (chosen[t]) begin if (sc[t] < min_sel) min_sel = sc[t]; end
        else if (sc[t] > max_uns) max_uns = sc[t];
      check(min_sel >= max_uns, "top-k separation");
      $display("selected from HBM tier: %0d, HBM read stalls: %0d", n_hbm_sel, u_hbm.n_rd_stall);
    end
    mac_full();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
