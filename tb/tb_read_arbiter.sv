// tb_read_arbiter: scans keys spread over the three tiers (scaled: 8 BRAM, 16 URAM
// tokens, the rest in the HBM model with random stalls) with a randomly stalling
// consumer. Checks token order, key data, the last flag and that the scan ends;
// counts HBM stalls and consumer stalls so both are known to have happened.
module tb_read_arbiter;
  import mp_pkg::*;
  localparam int unsigned KW = 32, BT = 8, UT = 16;
  logic clk = 0, rst_n = 0, start = 0, busy;
  tok_t n_tokens = '0;
  logic bram_re, uram_re, bram_we = 0, uram_we = 0;
  logic [$clog2(BT)-1:0] bram_raddr, bram_waddr = '0;
  logic [$clog2(UT)-1:0] uram_raddr, uram_waddr = '0;
  logic [KW-1:0] bram_rdata, uram_rdata, bram_wdata = '0, uram_wdata = '0;
  logic hbm_rd_req_valid, hbm_rd_req_ready, hbm_rd_resp_valid;
  tok_t hbm_rd_req_addr;
  logic [KW-1:0] hbm_rd_resp_data;
  logic hbm_wr_valid = 0, hbm_wr_ready;
  logic [31:0] hbm_wr_addr = '0;
  logic [KW-1:0] hbm_wr_data = '0;
  logic key_valid, key_ready = 0, key_last;
  tok_t key_token;
  logic [KW-1:0] key_data;
  int checks = 0, failures = 0;

  read_arbiter #(.KEY_W(KW), .BRAM_TOKENS(BT), .URAM_TOKENS(UT), .FIFO_DEPTH(4)) dut (
    .clk, .rst_n, .start, .n_tokens, .busy,
    .bram_re, .bram_raddr, .bram_rdata, .uram_re, .uram_raddr, .uram_rdata,
    .hbm_rd_req_valid, .hbm_rd_req_ready, .hbm_rd_req_addr,
    .hbm_rd_resp_valid, .hbm_rd_resp_data,
    .key_valid, .key_ready, .key_token, .key_data, .key_last);
  key_sram #(.DEPTH(BT), .W(KW)) u_b (.clk, .rst_n, .we(bram_we), .waddr(bram_waddr),
    .wdata(bram_wdata), .re(bram_re), .raddr(bram_raddr), .rdata(bram_rdata), .rvalid());
  key_sram #(.DEPTH(UT), .W(KW)) u_u (.clk, .rst_n, .we(uram_we), .waddr(uram_waddr),
    .wdata(uram_wdata), .re(uram_re), .raddr(uram_raddr), .rdata(uram_rdata), .rvalid());
  hbm_model #(.W(KW), .LAT(5), .STALL(1)) u_hbm (.clk, .rst_n,
    .wr_valid(hbm_wr_valid), .wr_ready(hbm_wr_ready), .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data),
    .rd_req_valid(hbm_rd_req_valid), .rd_req_ready(hbm_rd_req_ready), .rd_req_addr(hbm_rd_req_addr),
    .rd_resp_valid(hbm_rd_resp_valid), .rd_resp_data(hbm_rd_resp_data));
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [KW-1:0] keyval(int t);
    return KW'(32'h9E37_79B9 * (t + 1));
  endfunction

  int cons_stall = 0;
  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic scan(int n, int p_ready);
    int got = 0; bit last_seen = 0;
    @(negedge clk) begin n_tokens = n; start = 1; end
    @(negedge clk) start = 0;
    while (!last_seen) begin
      @(negedge clk);
      key_ready = ($urandom_range(0, 99) < p_ready);
      #1;
      if (key_valid && !key_ready) cons_stall++;
      @(posedge clk);
      if (key_valid && key_ready) begin
        check(key_token == tok_t'(got), $sformatf("order: got %0d want %0d", key_token, got));
        check(key_data == keyval(got), $sformatf("data of token %0d", got));
        check(key_last == (got == n - 1), $sformatf("last flag at %0d", got));
        last_seen = key_last;
        got++;
      end
    end
    repeat (3) @(negedge clk);
    check(got == n, "all keys delivered");
    check(!busy, "idle after scan");
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // fill tiers directly (the write path is tested elsewhere)
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      bram_we = (t < BT); bram_waddr = t[$clog2(BT)-1:0]; bram_wdata = keyval(t);
      uram_we = (t >= BT && t < BT + UT); uram_waddr = 4'(t - BT); uram_wdata = keyval(t);
      hbm_wr_valid = (t >= BT + UT); hbm_wr_addr = t - BT - UT; hbm_wr_data = keyval(t);
      if (hbm_wr_valid) begin
        @(posedge clk); while (!hbm_wr_ready) @(posedge clk);
      end
    end
    @(negedge clk) begin bram_we = 0; uram_we = 0; hbm_wr_valid = 0; end
    scan(40, 100);    // consumer always ready
    scan(40, 40);     // consumer stalls
    scan(5, 70);      // BRAM only
    scan(20, 70);     // BRAM + URAM
    check(u_hbm.n_rd_stall > 0, "HBM read stalls occurred");
    check(cons_stall > 0, "consumer stalls occurred");
    $display("hbm read stalls=%0d consumer stalls=%0d", u_hbm.n_rd_stall, cons_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
