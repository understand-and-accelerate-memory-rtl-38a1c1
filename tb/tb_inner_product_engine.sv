// tb_inner_product_engine: streams random keys through the engine (scaled: 8 heads,
// 16 elements, 2 heads per cycle) with a stalling consumer, and compares every
// dot product with one computed here. Also checks the group order, flags and the
// rate of one key per HEADS/HP cycles when nothing stalls.
module tb_inner_product_engine;
  import mp_pkg::*;
  localparam int unsigned H = 8, D = 16, EW = 8, HP = 2, G = H / HP;
  localparam int unsigned DW = 2 * EW + $clog2(D) + 1;
  localparam int unsigned NK = 50;
  logic clk = 0, rst_n = 0;
  logic key_valid = 0, key_ready, key_last = 0;
  tok_t key_token = '0;
  logic [D*EW-1:0] key_data = '0;
  logic [$clog2(G+1)-1:0] q_group;
  logic [HP-1:0][D*EW-1:0] q_heads;
  logic out_valid, out_ready = 0, out_key_end, out_last;
  tok_t out_token;
  logic [$clog2(G+1)-1:0] out_group;
  logic [HP-1:0][DW-1:0] out_dots;
  logic [D*EW-1:0] q [H];
  logic [D*EW-1:0] keys [NK];
  int checks = 0, failures = 0;
  int p_ready = 100;

  inner_product_engine #(.HEADS(H), .DIM(D), .ELEM_W(EW), .HP(HP)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int j = 0; j < HP; j++) q_heads[j] = q[(int'(q_group) * HP + j) % H];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint refdot(int h, int k);
    longint s = 0;
    for (int d = 0; d < D; d++)
      s += longint'($signed(q[h][d*EW +: EW])) * longint'($signed(keys[k][d*EW +: EW]));
    return s;
  endfunction

  initial begin
    #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // consumer
  int exp_k = 0, exp_g = 0;
  longint t_first, t_last;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      check(out_token == tok_t'(exp_k) && out_group == exp_g, "order");
      for (int j = 0; j < HP; j++)
        check(longint'($signed(out_dots[j])) == refdot(exp_g * HP + j, exp_k),
              $sformatf("dot key %0d head %0d", exp_k, exp_g * HP + j));
      check(out_key_end == (exp_g == G - 1), "key_end flag");
      check(out_last == (exp_g == G - 1 && exp_k == NK - 1), "last flag");
      if (exp_k == 0 && exp_g == 0) t_first = $time;
      if (exp_k == NK - 1 && exp_g == G - 1) t_last = $time;
      exp_g++;
      if (exp_g == G) begin exp_g = 0; exp_k++; end
    end
    out_ready <= ($urandom_range(0, 99) < p_ready);
  end

  task automatic run_keys();
    bit hs;
    exp_k = 0; exp_g = 0;
    for (int k = 0; k < NK; k++) begin
      @(negedge clk);
      key_valid = 1; key_token = k; key_data = keys[k]; key_last = (k == NK - 1);
      do begin #1 hs = key_ready; @(posedge clk); end while (!hs);
      #1;
    end
    key_valid = 0;
    repeat (20) @(negedge clk);
    check(exp_k == NK, "all keys scored");
  endtask

  initial begin
    for (int h = 0; h < H; h++) q[h] = {$urandom, $urandom, $urandom, $urandom};
    for (int k = 0; k < NK; k++) keys[k] = {$urandom, $urandom, $urandom, $urandom};
    keys[0] = {D{8'h80}};               // extreme values: -128 * x
    q[0] = {D{8'h80}};
    repeat (2) @(posedge clk); rst_n = 1;
    p_ready = 100; run_keys();
    // full rate: NK keys x G beats, one beat per cycle
    check((t_last - t_first) / 10 == NK * G - 1, $sformatf("rate: %0d cycles for %0d beats",
          (t_last - t_first) / 10 + 1, NK * G));
    p_ready = 50; run_keys();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
