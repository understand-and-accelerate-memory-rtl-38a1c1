// query_loader: loads the multi-head query and its per-head weights into an
// on-chip query buffer.
//
// For each decoded token the GPU sends the query of the lightweight indexer: one
// vector per query head (64 heads in the published configuration) and one weight
// per head, with which the per-head scores are averaged. They arrive from HBM as
// HEADS beats, head 0 first; beat h carries head h's vector and weight. After the
// last beat `loaded` goes high and the buffer stays fixed until the next query
// begins. While `hold` is high (a scan is using the buffer) no beat is accepted.
//
// The inner product engine reads HP heads at a time through the group read port
// (rd_group selects heads rd_group*HP .. rd_group*HP+HP-1, combinational read).
// All weights are visible at once on `weights`. Buffer layout and port shapes are
// this implementation's choice.
module query_loader
  import mp_pkg::*;
#(
  parameter int unsigned HEADS  = HEADS_DEF,
  parameter int unsigned DIM    = DIM_DEF,
  parameter int unsigned ELEM_W = ELEM_W_DEF,
  parameter int unsigned HP     = HP_DEF
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 hold,
  // query beats from HBM
  input  logic                                 q_in_valid,
  output logic                                 q_in_ready,
  input  logic [DIM*ELEM_W-1:0]                q_in_data,
  input  logic signed [WGT_W-1:0]              q_in_weight,
  output logic                                 loaded,
  // group read port
  input  logic [$clog2(HEADS/HP+1)-1:0]        rd_group,
  output logic [HP-1:0][DIM*ELEM_W-1:0]        rd_q,
  output logic [HEADS-1:0][WGT_W-1:0]          weights
);
  localparam int unsigned HW = $clog2(HEADS + 1);

  logic [DIM*ELEM_W-1:0] qbuf [HEADS];
  logic [WGT_W-1:0]      wbuf [HEADS];
  logic [HW-1:0]         head;   // next head to load

  assign q_in_ready = !hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head   <= '0;
      loaded <= 1'b0;
    end else if (q_in_valid && q_in_ready) begin
      if (head == HW'(HEADS - 1)) begin
        head   <= '0;
        loaded <= 1'b1;
      end else begin
        head   <= head + 1'b1;
        loaded <= 1'b0;    // a new query has begun
      end
    end
  end

  always_ff @(posedge clk) begin
    if (q_in_valid && q_in_ready) begin
      qbuf[head[$clog2(HEADS)-1:0]] <= q_in_data;
      wbuf[head[$clog2(HEADS)-1:0]] <= q_in_weight;
    end
  end

  always_comb begin
    for (int j = 0; j < HP; j++) rd_q[j] = qbuf[(int'(rd_group) * HP + j) % HEADS];
    for (int h = 0; h < HEADS; h++) weights[h] = wbuf[h];
  end

endmodule
