// topk_retriever: keeps a running top-k list of scores and emits the selected
// indices.
//
// Top-k mode (the published structure): the list holds K_MAX (score, index, valid)
// slots, of which the first `k` are used. A tree of comparators over the list
// finds the current minimum every cycle. An incoming score that is greater than
// the current minimum (or any arriving while a slot is still empty) replaces that
// minimum slot; the tree then updates the current minimum for the next cycle, so
// one score is taken per cycle. Ties keep the earlier index. After the beat marked
// `last`, the used slots are emitted one per cycle (list order, not sorted),
// followed by a one-cycle `done`. If fewer than k units were scanned, only those
// are emitted.
//
// Threshold mode: every score strictly greater than `threshold` is emitted at once,
// in scan order, and `done` follows once the last selected index has been taken. This is the threshold-based
// selection offered as an alternative to a token budget.
//
// The comparator tree, current-minimum register and score/index list follow the
// published block diagram; the tie rule, unsorted output order, run-time k and the
// valid/ready output handshake are this implementation's choices. K_MAX must be a
// power of two. `start` clears the list.
module topk_retriever
  import mp_pkg::*;
#(
  parameter int unsigned K_MAX = K_MAX_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  sel_mode_e    sel_mode,
  input  logic [15:0]  k,
  input  score_t       threshold,
  // scores
  input  logic         in_valid,
  output logic         in_ready,
  input  score_beat_t  in_beat,
  // selected indices
  output logic         out_valid,
  input  logic         out_ready,
  output tok_t         out_index,
  output score_t       out_score,
  output logic         done,
  output logic         busy,
  // replacements of the current minimum since start (observability)
  output tok_t         n_replace
);
  localparam int unsigned LG = $clog2(K_MAX);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_OUT} state_e;
  state_e state;

  score_t         l_score [K_MAX];
  tok_t           l_index [K_MAX];
  logic [K_MAX-1:0] l_valid;

  logic [LG:0]    out_ptr;
  logic [LG:0]    k_eff;

  // ---------------- comparator tree: current minimum ----------------
  // A node holds (occupied, score, slot). Unused slots (slot >= k) never win;
  // empty slots always win; otherwise the smaller score wins, the left one on a tie.
  for (genvar l = 0; l <= LG; l++) begin : lvl
    localparam int unsigned N = K_MAX >> l;
    logic          used [N];
    logic          occ  [N];
    score_t        sc   [N];
    logic [LG:0]   slot [N];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < N; i++) begin : g_i
        assign used[i] = (i < k_eff);
        assign occ[i]  = l_valid[i];
        assign sc[i]   = l_score[i];
        assign slot[i] = (LG+1)'(i);
      end
    end else begin : g_node
      for (genvar i = 0; i < N; i++) begin : g_i
        logic pick_r;
        always_comb begin
          if (!lvl[l-1].used[2*i])          pick_r = lvl[l-1].used[2*i+1];
          else if (!lvl[l-1].used[2*i+1])   pick_r = 1'b0;
          else if (!lvl[l-1].occ[2*i])      pick_r = 1'b0;
          else if (!lvl[l-1].occ[2*i+1])    pick_r = 1'b1;
          else pick_r = (lvl[l-1].sc[2*i] > lvl[l-1].sc[2*i+1]);
        end
        assign used[i] = pick_r ? lvl[l-1].used[2*i+1] : lvl[l-1].used[2*i];
        assign occ[i]  = pick_r ? lvl[l-1].occ[2*i+1]  : lvl[l-1].occ[2*i];
        assign sc[i]   = pick_r ? lvl[l-1].sc[2*i+1]   : lvl[l-1].sc[2*i];
        assign slot[i] = pick_r ? lvl[l-1].slot[2*i+1] : lvl[l-1].slot[2*i];
      end
    end
  end

  wire          min_occ   = lvl[LG].occ[0];
  wire score_t  cur_min   = lvl[LG].sc[0];
  wire [LG:0]   min_slot  = lvl[LG].slot[0];

  // ---------------- control ----------------
  wire take     = in_valid && in_ready;
  wire thr_hit  = in_beat.score > threshold;
  wire replace  = take && (sel_mode == SEL_TOPK) && (!min_occ || in_beat.score > cur_min);

  always_comb begin
    unique case (state)
      S_SCAN:  in_ready = (sel_mode == SEL_TOPK) ? 1'b1 : (!out_valid || out_ready);
      default: in_ready = 1'b0;
    endcase
  end

  assign busy = (state != S_IDLE) || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      l_valid   <= '0;
      out_ptr   <= '0;
      k_eff     <= (LG+1)'(K_MAX);
      out_valid <= 1'b0;
      out_index <= '0;
      out_score <= '0;
      done      <= 1'b0;
      n_replace <= '0;
    end else begin
      done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state     <= S_SCAN;
            l_valid   <= '0;
            n_replace <= '0;
            k_eff     <= (k == '0) ? (LG+1)'(1) :
                         (32'(k) > K_MAX) ? (LG+1)'(K_MAX) : (LG+1)'(k);
          end
        end
        S_SCAN: begin
          if (take) begin
            if (sel_mode == SEL_THRESH && thr_hit) begin
              out_valid <= 1'b1;
              out_index <= in_beat.index;
              out_score <= in_beat.score;
            end
            if (in_beat.last) begin
              // top-k: emit the list; threshold: only wait for the last hit to leave
              state   <= S_OUT;
              out_ptr <= (sel_mode == SEL_TOPK) ? '0 : k_eff;
            end
          end
        end
        S_OUT: begin
          if (!out_valid || out_ready) begin
            if (out_ptr >= k_eff) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              out_ptr <= out_ptr + 1'b1;
              if (l_valid[out_ptr[LG-1:0]]) begin
                out_valid <= 1'b1;
                out_index <= l_index[out_ptr[LG-1:0]];
                out_score <= l_score[out_ptr[LG-1:0]];
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
      if (replace) begin
        l_valid[min_slot[LG-1:0]] <= 1'b1;
        if (min_occ) n_replace <= n_replace + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (replace) begin
      l_score[min_slot[LG-1:0]] <= in_beat.score;
      l_index[min_slot[LG-1:0]] <= in_beat.index;
    end
  end

  initial assert (K_MAX >= 2 && (K_MAX & (K_MAX - 1)) == 0)
    else $error("K_MAX must be a power of two");

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_index));
  a_min_used: assert property (@(posedge clk) disable iff (!rst_n)
    replace |-> lvl[LG].used[0]);

endmodule
