// tb_reduction_unit: feeds per-head dot-product beats (scaled: 8 heads, 2 per
// beat) with random weights and checks the weighted sum per key, then the maximum
// over groups of 3 keys (including a partial last group), against values computed
// here, with a stalling consumer.
module tb_reduction_unit;
  import mp_pkg::*;
  localparam int unsigned H = 8, HP = 2, G = H / HP, DW = 24, NK = 40;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] group_len = 1;
  logic [H-1:0][WGT_W-1:0] weights;
  logic in_valid = 0, in_ready, in_key_end = 0, in_last = 0;
  logic [$clog2(G+1)-1:0] in_group = '0;
  logic [HP-1:0][DW-1:0] in_dots = '0;
  logic out_valid, out_ready = 0;
  score_beat_t out_beat;
  longint dots [NK][H];
  longint ks [NK];
  int checks = 0, failures = 0;
  int p_ready = 100;

  reduction_unit #(.HEADS(H), .HP(HP), .DOT_W(DW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint exp_q [$];
  int nout = 0;
  bit saw_last;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      check(exp_q.size() > nout, "unexpected output");
      if (exp_q.size() > nout)
        check(longint'(out_beat.score) == exp_q[nout],
              $sformatf("unit %0d score %0d want %0d", nout, out_beat.score, exp_q[nout]));
      check(out_beat.index == tok_t'(nout), "unit index");
      check(out_beat.last == (nout == exp_q.size() - 1), "last flag");
      nout++;
    end
    out_ready <= ($urandom_range(0, 99) < p_ready);
  end

  task automatic run(int gl);
    bit hs;
    exp_q.delete(); nout = 0;
    for (int k = 0; k < NK; k++) begin
      ks[k] = 0;
      for (int h = 0; h < H; h++) ks[k] += dots[k][h] * longint'($signed(weights[h]));
    end
    for (int u = 0; u * gl < NK; u++) begin
      longint m = ks[u * gl];
      for (int k = u * gl; k < (u + 1) * gl && k < NK; k++) if (ks[k] > m) m = ks[k];
      exp_q.push_back(m);
    end
    @(negedge clk) begin group_len = gl; start = 1; end
    @(negedge clk) start = 0;
    for (int k = 0; k < NK; k++)
      for (int g = 0; g < G; g++) begin
        @(negedge clk);
        in_valid = 1; in_group = g;
        for (int j = 0; j < HP; j++) in_dots[j] = DW'(dots[k][g*HP+j]);
        in_key_end = (g == G - 1); in_last = (g == G - 1) && (k == NK - 1);
        do begin #1 hs = in_ready; @(posedge clk); end while (!hs);
        #1;
      end
    in_valid = 0;
    repeat (20) @(negedge clk);
    check(nout == exp_q.size(), $sformatf("units out %0d want %0d", nout, exp_q.size()));
  endtask

  initial begin
    for (int h = 0; h < H; h++) weights[h] = $urandom;
    for (int k = 0; k < NK; k++)
      for (int h = 0; h < H; h++) dots[k][h] = $signed(DW'($urandom));
    repeat (2) @(posedge clk); rst_n = 1;
    run(1);
    p_ready = 40; run(3);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
