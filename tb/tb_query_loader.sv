// tb_query_loader: loads two queries (scaled: 8 heads of 4 elements, 2 heads per
// group) and checks the group read port, the weights, `loaded` and `hold`.
module tb_query_loader;
  import mp_pkg::*;
  localparam int unsigned H = 8, D = 4, EW = 8, HP = 2, G = H / HP;
  logic clk = 0, rst_n = 0, hold = 0;
  logic q_in_valid = 0, q_in_ready, loaded;
  logic [D*EW-1:0] q_in_data = '0;
  logic signed [WGT_W-1:0] q_in_weight = '0;
  logic [$clog2(G+1)-1:0] rd_group = '0;
  logic [HP-1:0][D*EW-1:0] rd_q;
  logic [H-1:0][WGT_W-1:0] weights;
  logic [D*EW-1:0] refq [H];
  logic [WGT_W-1:0] refw [H];
  int checks = 0, failures = 0;

  query_loader #(.HEADS(H), .DIM(D), .ELEM_W(EW), .HP(HP)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_query(int seed);
    for (int h = 0; h < H; h++) begin
      @(negedge clk);
      q_in_valid = 1; q_in_data = $urandom; q_in_weight = $urandom;
      refq[h] = q_in_data; refw[h] = q_in_weight;
      #1 check(q_in_ready, "ready when not held");
      if (h == 1) check(!loaded, "loaded drops when a new query begins");
    end
    @(negedge clk) q_in_valid = 0;
  endtask

  task automatic verify();
    check(loaded, "loaded after last head");
    for (int g = 0; g < G; g++) begin
      rd_group = g; #1;
      for (int j = 0; j < HP; j++)
        check(rd_q[j] == refq[g*HP+j], $sformatf("group %0d head %0d", g, j));
    end
    for (int h = 0; h < H; h++) check(weights[h] == refw[h], $sformatf("weight %0d", h));
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    check(!loaded, "not loaded after reset");
    load_query(1); verify();
    // while held, beats are refused and the buffer is unchanged
    @(negedge clk) begin hold = 1; q_in_valid = 1; q_in_data = '1; end
    #1 check(!q_in_ready, "not ready while held");
    repeat (3) @(negedge clk);
    q_in_valid = 0; hold = 0;
    verify();
    load_query(2); verify();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
