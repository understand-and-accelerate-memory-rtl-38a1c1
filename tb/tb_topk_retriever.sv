// tb_topk_retriever: random score streams (scaled: K_MAX = 16) in top-k mode with
// several k, fewer units than k, many ties, and threshold mode. The selection is
// checked against the scores kept here: right count, distinct indices, reported
// score matches, and no unselected score beats a selected one. Also checks the
// one-score-per-cycle rate of top-k mode.
module tb_topk_retriever;
  import mp_pkg::*;
  localparam int unsigned KM = 16;
  logic clk = 0, rst_n = 0, start = 0;
  sel_mode_e sel_mode = SEL_TOPK;
  logic [15:0] k = 8;
  score_t threshold = '0;
  logic in_valid = 0, in_ready;
  score_beat_t in_beat = '0;
  logic out_valid, out_ready = 0, done, busy;
  tok_t out_index, n_replace;
  score_t out_score;
  longint sc [];
  int checks = 0, failures = 0;
  int p_ready = 100;

  topk_retriever #(.K_MAX(KM)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int sel [$];
  bit done_seen;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      sel.push_back(int'(out_index));
      if (out_index < sc.size()) check(longint'(out_score) == sc[out_index], "reported score");
    end
    if (done) done_seen = 1;
    out_ready <= ($urandom_range(0, 99) < p_ready);
  end

  task automatic run(sel_mode_e m, int kk, int n, int range_, longint thr);
    bit hs; int want; longint t0, t1;
    sc = new[n];
    for (int i = 0; i < n; i++) sc[i] = longint'($urandom_range(0, range_)) - range_ / 2;
    sel.delete(); done_seen = 0;
    @(negedge clk) begin sel_mode = m; k = kk; threshold = thr; start = 1; end
    @(negedge clk) start = 0;
    t0 = $time;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1; in_beat.index = i; in_beat.score = sc[i]; in_beat.last = (i == n - 1);
      do begin #1 hs = in_ready; @(posedge clk); end while (!hs);
      #1;
    end
    t1 = $time;
    in_valid = 0;
    if (m == SEL_TOPK) check((t1 - t0) / 10 == n, $sformatf("one score per cycle (%0d for %0d)", (t1 - t0) / 10, n));
    while (!done_seen) @(negedge clk);
    repeat (2) @(negedge clk);
    // count
    if (m == SEL_TOPK) want = (n < kk) ? n : kk;
    else begin want = 0; foreach (sc[i]) if (sc[i] > thr) want++; end
    check(sel.size() == want, $sformatf("count %0d want %0d", sel.size(), want));
    // distinct, and separation between selected and unselected
    begin
      bit chosen [] = new[n];
      longint min_sel = 64'h7fffffffffffffff, max_uns = -64'h7fffffffffffffff;
      foreach (sel[i]) begin
        check(sel[i] < n && !chosen[sel[i]], "distinct valid index");
        if (sel[i] < n) chosen[sel[i]] = 1;
      end
      foreach (sc[i]) if (chosen[i]) begin if (sc[i] < min_sel) min_sel = sc[i]; end
                      else if (sc[i] > max_uns) max_uns = sc[i];
      if (m == SEL_TOPK) check(sel.size() == 0 || min_sel >= max_uns, "top-k separation");
      else foreach (sc[i]) check(chosen[i] == (sc[i] > thr), "threshold rule");
    end
    check(!busy, "idle at end");
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    p_ready = 100;
    run(SEL_TOPK, 8, 200, 100000, 0);
    run(SEL_TOPK, 16, 300, 100000, 0);
    check(n_replace > 0, "current minimum was replaced");
    run(SEL_TOPK, 5, 100, 6, 0);          // many ties
    run(SEL_TOPK, 16, 7, 1000, 0);        // fewer units than k
    run(SEL_TOPK, 1, 50, 1000, 0);
    p_ready = 30;
    run(SEL_TOPK, 12, 150, 100000, 0);
    run(SEL_THRESH, 0, 200, 1000, 300);
    p_ready = 100;
    run(SEL_THRESH, 0, 100, 1000, -100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
