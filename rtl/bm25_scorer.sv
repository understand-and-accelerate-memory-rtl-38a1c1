// bm25_scorer: BM25 lexical relevancy scores for retrieval-augmented generation,
// streamed to the top-k retriever.
//
// BM25 scores a document d for a query as
//   sum over query terms t of  qtf(t) * idf(t) * tf(t,d) * (k1 + 1) / (tf(t,d) + K_d),
//   K_d = k1 * (1 - b + b * |d| / avgdl),
// where tf is the term's count in d and qtf its count in the query. The query
// arrives pre-processed into word counts; the scorer walks the term-frequency
// postings of the query's terms, in whatever order they come, and accumulates
// per-document scores (the irregular, data-dependent access of this step).
//
// Operation: `start` opens a new query. Each posting beat {doc, tf, idf, qtf,
// last} flows through a multiplier, a pipelined divider (one posting per cycle,
// NUM_W cycles deep) and a read-modify-write of the document's accumulator, done
// in one cycle (asynchronous read), so postings of the same document may follow
// each other back to back. After the beat marked `last` has drained, every
// document 0 .. n_docs-1 is emitted in order as a score beat (index = document
// ID), one per cycle under out_ready, and its accumulator is cleared as it leaves.
// Accumulators are also cleared when the document's K_d is written, so the first
// query after corpus preparation starts from zero. Postings must name documents
// below n_docs.
//
// Fixed point: idf, k1+1 and K_d are unsigned Q8.8; tf is an integer (16 bit),
// qtf 8 bit; the emitted score is Q.8. K_d per document is written by the host
// through the norm port when the corpus is prepared (it depends only on document
// length). The formula follows standard BM25; the posting format, number formats,
// clear-on-emit accumulator and document-count limit NDOCS are this
// implementation's choices. A term's contribution is below idf*(k1+1)*qtf/256 <
// 2^32, so the divider's upper quotient bits are always zero (lint lists them as
// unused) and the 40-bit accumulator has room for 256 maximal terms. Postings may
// only arrive between start and their `last` beat.
module bm25_scorer
  import mp_pkg::*;
#(
  parameter int unsigned NDOCS = 1048576
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  tok_t                     n_docs,
  input  logic [15:0]              k1p1,        // k1 + 1, Q8.8
  // per-document length normalisation K_d (Q8.8), written ahead of queries
  input  logic                     norm_we,
  input  logic [$clog2(NDOCS)-1:0] norm_addr,
  input  logic [15:0]              norm_data,
  // postings
  input  logic                     post_valid,
  output logic                     post_ready,
  input  tok_t                     post_doc,
  input  logic [15:0]              post_tf,
  input  logic [15:0]              post_idf,    // Q8.8
  input  logic [7:0]               post_qtf,
  input  logic                     post_last,
  // scores to the retriever
  output logic                     out_valid,
  input  logic                     out_ready,
  output score_beat_t              out_beat,
  output logic                     busy
);
  localparam int unsigned AW    = $clog2(NDOCS);
  localparam int unsigned NUM_W = 56;
  localparam int unsigned DEN_W = 25;
  localparam int unsigned ACC_W = 40;

  typedef enum logic [1:0] {B_IDLE, B_ACCUM, B_DRAIN, B_EMIT} bstate_e;
  bstate_e state;

  logic [15:0]      norm_mem [NDOCS];
  logic [ACC_W-1:0] acc_mem  [NDOCS];

  // ---------------- stage 1: fetch K_d, form numerator / denominator ----------------
  logic             s1_valid, s1_last;
  logic [AW-1:0]    s1_doc;
  logic [NUM_W-1:0] s1_num;
  logic [DEN_W-1:0] s1_den;

  assign post_ready = (state == B_ACCUM);
  wire   take       = post_valid && post_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= take;
  end

  always_ff @(posedge clk) begin
    if (norm_we) norm_mem[norm_addr] <= norm_data;
    if (take) begin
      s1_doc  <= post_doc[AW-1:0];
      s1_last <= post_last;
      s1_num  <= NUM_W'(post_idf) * NUM_W'(k1p1) * NUM_W'(post_tf) * NUM_W'(post_qtf);
      s1_den  <= (DEN_W'(post_tf) << 8) + DEN_W'(norm_mem[post_doc[AW-1:0]]);
    end
  end

  // ---------------- stage 2: divide ----------------
  logic             d_valid, d_last;
  logic [AW-1:0]    d_doc;
  logic [NUM_W-1:0] d_q;

  pipe_divider #(.NW(NUM_W), .DW(DEN_W), .PW(AW + 1)) u_div (
    .clk, .rst_n,
    .in_valid(s1_valid), .in_num(s1_num), .in_den(s1_den), .in_payload({s1_doc, s1_last}),
    .out_valid(d_valid), .out_q(d_q), .out_payload({d_doc, d_last})
  );

  // ---------------- stage 3: accumulate (read-modify-write, one cycle) ----------------
  // The accumulator is cleared when the document's K_d is written (corpus
  // preparation, idle only) and again as its score is emitted, so every query
  // starts from zero without a separate clearing pass.
  logic [AW-1:0] emit_a;
  wire           emit_now = (state == B_EMIT) && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (d_valid)       acc_mem[d_doc]     <= acc_mem[d_doc] + ACC_W'(d_q);
    else if (emit_now) acc_mem[emit_a]    <= '0;
    else if (norm_we)  acc_mem[norm_addr] <= '0;
  end

  // ---------------- control and emission ----------------
  tok_t   emit_doc, last_doc;
  assign emit_a = emit_doc[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= B_IDLE;
      emit_doc  <= '0;
      last_doc  <= '0;
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        B_IDLE: if (start) begin
          state    <= B_ACCUM;
          last_doc <= (n_docs == '0) ? '0 : n_docs - 1'b1;
        end
        B_ACCUM: if (take && post_last) state <= B_DRAIN;
        B_DRAIN: if (d_valid && d_last) begin
          state    <= B_EMIT;
          emit_doc <= '0;
        end
        B_EMIT: if (emit_now) begin
          out_valid      <= 1'b1;
          out_beat.index <= emit_doc;
          out_beat.score <= score_t'(acc_mem[emit_a]);
          out_beat.last  <= (emit_doc == last_doc);
          emit_doc       <= emit_doc + 1'b1;
          if (emit_doc == last_doc) state <= B_IDLE;
        end
        default: state <= B_IDLE;
      endcase
    end
  end

  assign busy = (state != B_IDLE) || out_valid;

  a_doc_range: assert property (@(posedge clk) disable iff (!rst_n)
    take |-> (post_doc < tok_t'(NDOCS)));
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));

endmodule
