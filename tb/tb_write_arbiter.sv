// tb_write_arbiter: drives token IDs across the three tiers (scaled tiers: 4 BRAM,
// 8 URAM tokens) and checks routing, tier-local addresses and HBM back-pressure.
module tb_write_arbiter;
  import mp_pkg::*;
  localparam int unsigned KW = 16, BT = 4, UT = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  tok_t in_token = '0;
  logic [KW-1:0] in_key = '0;
  logic bram_we, uram_we, hbm_wr_valid, hbm_wr_ready = 0;
  logic [$clog2(BT)-1:0] bram_waddr;
  logic [$clog2(UT)-1:0] uram_waddr;
  logic [KW-1:0] bram_wdata, uram_wdata, hbm_wr_data;
  tok_t hbm_wr_addr;
  int checks = 0, failures = 0;

  write_arbiter #(.KEY_W(KW), .BRAM_TOKENS(BT), .URAM_TOKENS(UT)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < 2; r++) begin
        @(negedge clk);
        in_valid = 1; in_token = tok_t'(t); in_key = KW'(t * 3 + 1); hbm_wr_ready = r[0];
        #1;
        if (t < BT) begin
          check(bram_we && !uram_we && !hbm_wr_valid, $sformatf("t%0d -> BRAM", t));
          check(bram_waddr == t && bram_wdata == in_key, "BRAM addr/data");
          check(in_ready, "BRAM always ready");
        end else if (t < BT + UT) begin
          check(!bram_we && uram_we && !hbm_wr_valid, $sformatf("t%0d -> URAM", t));
          check(uram_waddr == t - BT && uram_wdata == in_key, "URAM addr/data");
          check(in_ready, "URAM always ready");
        end else begin
          check(!bram_we && !uram_we && hbm_wr_valid, $sformatf("t%0d -> HBM", t));
          check(hbm_wr_addr == tok_t'(t - BT - UT) && hbm_wr_data == in_key, "HBM addr/data");
          check(in_ready == hbm_wr_ready, "HBM back-pressure passes through");
        end
      end
    end
    @(negedge clk) in_valid = 0; #1;
    check(!bram_we && !uram_we && !hbm_wr_valid, "idle: no strobe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
