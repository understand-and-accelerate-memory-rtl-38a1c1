// hbm_model: behavioural model of the off-chip HBM tier that holds keys of tokens
// beyond the on-chip tiers. Not synthesizable; for testbenches only.
//
// Writes: hbm_wr_valid/ready, address in keys. Reads: requests (valid/ready) are
// answered in order, one per cycle at most, LAT cycles after acceptance (LAT >= 1)
// on resp_valid/resp_data, which have no ready. When STALL is set, both ready
// signals drop pseudo-randomly to mimic contention for the HBM channels.
// Storage is sparse (associative); an unwritten address reads as zero.
module hbm_model #(
  parameter int unsigned W     = 1024,
  parameter int unsigned LAT   = 6,
  parameter bit          STALL = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [31:0]   wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_req_valid,
  output logic          rd_req_ready,
  input  logic [31:0]   rd_req_addr,
  output logic          rd_resp_valid,
  output logic [W-1:0]  rd_resp_data
);
  logic [W-1:0] mem [int unsigned];
  longint unsigned cyc;
  longint unsigned due_q [$];
  logic [W-1:0]    dat_q [$];
  int unsigned     n_wr_stall, n_rd_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc           <= 0;
      wr_ready      <= 1'b0;
      rd_req_ready  <= 1'b0;
      rd_resp_valid <= 1'b0;
      rd_resp_data  <= '0;
      n_wr_stall    <= 0;
      n_rd_stall    <= 0;
    end else begin
      cyc <= cyc + 1;
      if (wr_valid && wr_ready) mem[wr_addr] = wr_data;
      if (wr_valid && !wr_ready) n_wr_stall <= n_wr_stall + 1;
      if (rd_req_valid && !rd_req_ready) n_rd_stall <= n_rd_stall + 1;
      if (rd_req_valid && rd_req_ready) begin
        due_q.push_back(cyc + LAT - 1);
        dat_q.push_back(mem.exists(rd_req_addr) ? mem[rd_req_addr] : '0);
      end
      if (due_q.size() != 0 && due_q[0] <= cyc) begin
        void'(due_q.pop_front());
        rd_resp_valid <= 1'b1;
        rd_resp_data  <= dat_q.pop_front();
      end else begin
        rd_resp_valid <= 1'b0;
      end
      wr_ready     <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
      rd_req_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
    end
  end
endmodule
