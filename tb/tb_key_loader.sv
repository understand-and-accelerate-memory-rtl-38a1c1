// tb_key_loader: checks token numbering, back-pressure, the 1M-token style
// overflow (here MAX_TOKENS = 5) and `clear`.
module tb_key_loader;
  import mp_pkg::*;
  localparam int unsigned KW = 16, MAXT = 5;
  logic clk = 0, rst_n = 0, clear = 0;
  logic key_in_valid = 0, key_in_ready;
  logic [KW-1:0] key_in_data = '0;
  logic wr_valid, wr_ready = 0, overflow, idle;
  tok_t wr_token, n_tokens;
  logic [KW-1:0] wr_key;
  int checks = 0, failures = 0;

  key_loader #(.KEY_W(KW), .MAX_TOKENS(MAXT)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // sink: random ready, record accepted writes
  tok_t got_tok [$];
  logic [KW-1:0] got_key [$];
  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin got_tok.push_back(wr_token); got_key.push_back(wr_key); end
    wr_ready <= ($urandom_range(0, 2) != 0);
  end

  task automatic send(logic [KW-1:0] d);
    bit hs;
    @(negedge clk);
    key_in_valid = 1; key_in_data = d;
    do begin #1 hs = key_in_ready; @(posedge clk); end while (!hs);
    #1 key_in_valid = 0;
  endtask

  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < 4; i++) send(KW'(16'hA000 + i));
    repeat (10) @(posedge clk);
    check(n_tokens == 4, "n_tokens after 4");
    check(!overflow, "no overflow yet");
    check(got_tok.size() == 4, "4 writes");
    for (int i = 0; i < got_tok.size(); i++) begin
      check(got_tok[i] == tok_t'(i), $sformatf("token %0d numbered %0d", i, got_tok[i]));
      check(got_key[i] == KW'(16'hA000 + i), "key data");
    end
    // fill to the limit, then overflow
    send(16'hB000); send(16'hB001); send(16'hB002);
    repeat (10) @(posedge clk);
    check(n_tokens == MAXT, "saturates at MAX_TOKENS");
    check(overflow, "overflow flag set");
    check(got_tok.size() == MAXT, "dropped keys are not written");
    check(idle, "idle after drain");
    // clear starts a new sequence
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    check(n_tokens == 0 && !overflow, "clear resets");
    got_tok.delete(); got_key.delete();
    send(16'hC000); repeat (10) @(posedge clk);
    check(got_tok.size() == 1 && got_tok[0] == 0 && got_key[0] == 16'hC000, "token 0 after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
