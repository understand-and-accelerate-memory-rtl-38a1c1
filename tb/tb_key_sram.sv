// tb_key_sram: random writes and reads against a reference array; checks the
// one-cycle read latency, rvalid, and read-during-write returning the old word.
module tb_key_sram;
  localparam int unsigned D = 64, W = 32;
  logic clk = 0, rst_n = 0, we = 0, re = 0, rvalid;
  logic [$clog2(D)-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  key_sram #(.DEPTH(D), .W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [W-1:0] expect_q;
  logic         expect_v;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = a; wdata = $urandom; ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    expect_v = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      if (expect_v) begin
        check(rvalid, "rvalid one cycle after re");
        check(rdata == expect_q, $sformatf("read data at step %0d", i));
      end else check(!rvalid, "no rvalid without re");
      re = $urandom_range(0, 1); raddr = $urandom_range(0, D - 1);
      we = $urandom_range(0, 1); waddr = $urandom_range(0, D - 1); wdata = $urandom;
      expect_v = re; expect_q = ref_mem[raddr];    // old word on collision
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
