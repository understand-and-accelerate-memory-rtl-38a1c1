// tb_bm25_scorer: scores random queries over a small corpus (64-document store,
// 50 documents used) and compares every emitted document score with the BM25
// formula evaluated here in the same fixed point. Postings of different terms hit
// the same documents back to back (accumulator read-modify-write), the consumer
// stalls at random, and a second query checks that the previous scores vanish.
// Also checks that postings are taken one per cycle.
module tb_bm25_scorer;
  import mp_pkg::*;
  localparam int unsigned ND = 64, NUSE = 50, NT = 4;
  logic clk = 0, rst_n = 0, start = 0;
  tok_t n_docs = NUSE;
  logic [15:0] k1p1 = 16'd640;     // k1 = 1.5
  logic norm_we = 0;
  logic [$clog2(ND)-1:0] norm_addr = '0;
  logic [15:0] norm_data = '0;
  logic post_valid = 0, post_ready, post_last = 0;
  tok_t post_doc = '0;
  logic [15:0] post_tf = '0, post_idf = '0;
  logic [7:0] post_qtf = '0;
  logic out_valid, out_ready = 0, busy;
  score_beat_t out_beat;
  longint kd [ND];
  longint ref_sc [NUSE];
  int checks = 0, failures = 0;
  int p_ready = 100;

  bm25_scorer #(.NDOCS(ND)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #3000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nout;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      check(out_beat.index == tok_t'(nout), "document order");
      if (nout < NUSE) check(longint'(out_beat.score) == ref_sc[nout],
            $sformatf("doc %0d score %0d want %0d", nout, out_beat.score, ref_sc[nout]));
      check(out_beat.last == (nout == NUSE - 1), "last flag");
      nout++;
    end
    out_ready <= ($urandom_range(0, 99) < p_ready);
  end

  task automatic query();
    int docs [$]; longint t0, t1; int np = 0;
    foreach (ref_sc[d]) ref_sc[d] = 0;
    nout = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    t0 = $time;
    for (int t = 0; t < NT; t++) begin
      int idf = $urandom_range(10, 2000), qtf = $urandom_range(1, 3);
      docs.delete();
      for (int d = 0; d < NUSE; d++) if ($urandom_range(0, 2) == 0) docs.push_back(d);
      if (t == 1) begin docs.push_front(docs[docs.size() - 1]); void'(docs.pop_back()); end
      foreach (docs[i]) begin
        int tf = $urandom_range(1, 20);
        longint num = longint'(idf) * 640 * tf * qtf;
        longint den = (longint'(tf) << 8) + kd[docs[i]];
        ref_sc[docs[i]] += num / den;
        @(negedge clk);
        post_valid = 1; post_doc = docs[i]; post_tf = tf; post_idf = idf; post_qtf = qtf;
        post_last = (t == NT - 1) && (i == docs.size() - 1);
        #1 check(post_ready, "posting accepted every cycle");
        np++;
      end
    end
    @(negedge clk) post_valid = 0;
    t1 = $time;
    check((t1 - t0) / 10 == np + 1, "one posting per cycle");
    while (nout < NUSE) @(negedge clk);
    repeat (5) @(negedge clk);
    check(nout == NUSE && !busy, "all documents emitted");
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int d = 0; d < ND; d++) begin
      @(negedge clk);
      kd[d] = $urandom_range(100, 700);
      norm_we = 1; norm_addr = d; norm_data = kd[d];
    end
    @(negedge clk) norm_we = 0;
    query();
    p_ready = 40;
    query();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
