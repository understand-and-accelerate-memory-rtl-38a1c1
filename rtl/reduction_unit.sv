// reduction_unit: turns the inner product engine's per-head partial results into
// one relevancy score per retrieval unit.
//
// Weighted sum: for each key it accumulates sum_h w_h * dot_h over the HEADS/HP
// group beats of that key (w_h is the query loader's per-head weight). This is the
// score of the DeepSeek-style indexer, which averages the per-head dot products
// with weights derived from the input token. For a plain single-query inner
// product set w_0 = 1 and the other weights to 0.
//
// Max reduction: when `group_len` > 1, consecutive keys form one retrieval unit
// and the unit's score is the maximum of its keys' scores (page-wise selection:
// a page represented by several vectors, e.g. a min and a max vector, scores as
// the largest of their dot products). group_len = 1 gives one score per key. The
// emitted index counts units from 0 since `start`; a scan that ends mid-unit
// emits the partial unit.
//
// The published design names the "Reduction + Weighted Sum" unit and describes both
// reductions; the run-time group_len and integer arithmetic are this
// implementation's choices. Timing: one output register; a beat is consumed each
// cycle unless a finished score waits on out_ready.
module reduction_unit
  import mp_pkg::*;
#(
  parameter int unsigned HEADS  = HEADS_DEF,
  parameter int unsigned HP     = HP_DEF,
  parameter int unsigned DOT_W  = 2 * ELEM_W_DEF + $clog2(DIM_DEF) + 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic [15:0]                        group_len,
  input  logic [HEADS-1:0][WGT_W-1:0]        weights,
  // partial results from the inner product engine
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [$clog2(HEADS/HP+1)-1:0]      in_group,
  input  logic [HP-1:0][DOT_W-1:0]           in_dots,
  input  logic                               in_key_end,
  input  logic                               in_last,
  // final scores
  output logic                               out_valid,
  input  logic                               out_ready,
  output score_beat_t                        out_beat
);
  score_t       acc, part, key_score, gmax, unit_score;
  logic [15:0]  gcount;
  tok_t         unit_idx;
  logic         emit;

  assign in_ready = !out_valid || out_ready;

  always_comb begin
    part = '0;
    for (int j = 0; j < HP; j++) begin
      part += score_t'($signed(in_dots[j])) *
              score_t'($signed(weights[(int'(in_group) * HP + j) % HEADS]));
    end
    key_score  = (in_group == '0) ? part : acc + part;
    unit_score = (gcount == '0 || key_score > gmax) ? key_score : gmax;
    emit       = in_key_end && (in_last || gcount + 1'b1 >= group_len);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      gmax      <= '0;
      gcount    <= '0;
      unit_idx  <= '0;
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else if (start) begin
      gcount    <= '0;
      unit_idx  <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        acc <= key_score;
        if (in_key_end) begin
          if (emit) begin
            out_valid      <= 1'b1;
            out_beat.index <= unit_idx;
            out_beat.score <= unit_score;
            out_beat.last  <= in_last;
            unit_idx       <= unit_idx + 1'b1;
            gcount         <= '0;
          end else begin
            gmax   <= unit_score;
            gcount <= gcount + 1'b1;
          end
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n || start)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));

endmodule
