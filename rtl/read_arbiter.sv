// read_arbiter: streams every stored key, in token order, to the inner product
// engine, fetching each from the tier that holds it.
//
// On `start` it scans tokens 0 .. n_tokens-1. A token below BRAM_TOKENS is read
// from the BRAM tier, one below BRAM_TOKENS + URAM_TOKENS from the URAM tier, the
// rest from HBM (the published partition: BRAM 0-16383, URAM 16384-65535, HBM from
// 65536). On-chip reads take one cycle; HBM reads return in request order after a
// variable latency of at least one cycle and have no ready (the arbiter only asks
// when it has room for the answer).
//
// Ordering: because tiers are ordered by token ID and the scan is ascending, all
// on-chip reads are issued before any HBM read, so answers arrive in token order
// without reordering. Flow control: keys collect in an output FIFO of FIFO_DEPTH;
// a read is issued only if FIFO occupancy plus reads in flight is below the depth,
// which also bounds outstanding HBM requests. Throughput: one key per cycle while
// the consumer keeps up and HBM answers fast enough; a slow HBM stalls the scan.
// The output word is {token, key, last}; `last` marks token n_tokens-1.
module read_arbiter
  import mp_pkg::*;
#(
  parameter int unsigned KEY_W       = DIM_DEF * ELEM_W_DEF,
  parameter int unsigned BRAM_TOKENS = BRAM_TOKENS_DEF,
  parameter int unsigned URAM_TOKENS = URAM_TOKENS_DEF,
  parameter int unsigned FIFO_DEPTH  = 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  tok_t                           n_tokens,
  output logic                           busy,
  // BRAM / URAM read ports
  output logic                           bram_re,
  output logic [$clog2(BRAM_TOKENS)-1:0] bram_raddr,
  input  logic [KEY_W-1:0]               bram_rdata,
  output logic                           uram_re,
  output logic [$clog2(URAM_TOKENS)-1:0] uram_raddr,
  input  logic [KEY_W-1:0]               uram_rdata,
  // HBM read port
  output logic                           hbm_rd_req_valid,
  input  logic                           hbm_rd_req_ready,
  output tok_t                           hbm_rd_req_addr,
  input  logic                           hbm_rd_resp_valid,
  input  logic [KEY_W-1:0]               hbm_rd_resp_data,
  // key stream to the inner product engine
  output logic                           key_valid,
  input  logic                           key_ready,
  output tok_t                           key_token,
  output logic [KEY_W-1:0]               key_data,
  output logic                           key_last
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned FW = TOK_W + KEY_W + 1;

  logic          scanning;
  tok_t          next_tok, end_tok;
  logic [CW:0]   inflight;
  logic [CW-1:0] fifo_count;

  tier_e tier;
  tok_t  uram_off, hbm_off;
  logic  can_issue, issue;

  // one-cycle tag for on-chip reads
  logic  oc_pend;
  tier_e oc_tier;
  tok_t  oc_tok;
  logic  oc_last;

  // tag FIFO for HBM reads: {token, last}
  logic                tag_in_ready, tag_out_valid;
  logic [TOK_W:0]      tag_out;

  // output FIFO
  logic          f_in_valid, f_in_ready;
  logic [FW-1:0] f_in_data, f_out_data;

  always_comb begin
    tier      = tier_of(next_tok, BRAM_TOKENS, URAM_TOKENS);
    uram_off  = next_tok - tok_t'(BRAM_TOKENS);
    hbm_off   = next_tok - tok_t'(BRAM_TOKENS + URAM_TOKENS);
    can_issue = scanning && ((CW+1)'(fifo_count) + inflight < (CW+1)'(FIFO_DEPTH));

    bram_re          = can_issue && (tier == TIER_BRAM);
    bram_raddr       = next_tok[$clog2(BRAM_TOKENS)-1:0];
    uram_re          = can_issue && (tier == TIER_URAM);
    uram_raddr       = uram_off[$clog2(URAM_TOKENS)-1:0];
    hbm_rd_req_valid = can_issue && (tier == TIER_HBM) && tag_in_ready;
    hbm_rd_req_addr  = hbm_off;

    issue = bram_re || uram_re || (hbm_rd_req_valid && hbm_rd_req_ready);

    // answers into the output FIFO
    if (oc_pend) begin
      f_in_valid = 1'b1;
      f_in_data  = {oc_tok, (oc_tier == TIER_BRAM) ? bram_rdata : uram_rdata, oc_last};
    end else begin
      f_in_valid = hbm_rd_resp_valid;
      f_in_data  = {tag_out[TOK_W:1], hbm_rd_resp_data, tag_out[0]};
    end
  end

  wire received = f_in_valid;  // always accepted: space reserved by credits

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scanning <= 1'b0;
      next_tok <= '0;
      end_tok  <= '0;
      inflight <= '0;
      oc_pend  <= 1'b0;
      oc_tier  <= TIER_BRAM;
      oc_tok   <= '0;
      oc_last  <= 1'b0;
    end else begin
      if (start && !busy && n_tokens != '0) begin
        scanning <= 1'b1;
        next_tok <= '0;
        end_tok  <= n_tokens - 1'b1;
      end else if (issue) begin
        next_tok <= next_tok + 1'b1;
        if (next_tok == end_tok) scanning <= 1'b0;
      end
      oc_pend <= bram_re || uram_re;
      oc_tier <= tier;
      oc_tok  <= next_tok;
      oc_last <= (next_tok == end_tok);
      case ({issue, received})
        2'b10:   inflight <= inflight + 1'b1;
        2'b01:   inflight <= inflight - 1'b1;
        default: ;
      endcase
    end
  end

  assign busy = scanning || (inflight != '0) || key_valid;

  stream_fifo #(.W(TOK_W + 1), .DEPTH(FIFO_DEPTH)) u_tags (
    .clk, .rst_n,
    .in_valid (hbm_rd_req_valid && hbm_rd_req_ready),
    .in_ready (tag_in_ready),
    .in_data  ({next_tok, next_tok == end_tok}),
    .out_valid(tag_out_valid),
    .out_ready(hbm_rd_resp_valid),
    .out_data (tag_out),
    .count    ()
  );

  stream_fifo #(.W(FW), .DEPTH(FIFO_DEPTH)) u_keys (
    .clk, .rst_n,
    .in_valid (f_in_valid),
    .in_ready (f_in_ready),
    .in_data  (f_in_data),
    .out_valid(key_valid),
    .out_ready(key_ready),
    .out_data (f_out_data),
    .count    (fifo_count)
  );

  assign {key_token, key_data, key_last} = f_out_data;

  a_no_collide: assert property (@(posedge clk) disable iff (!rst_n)
    !(oc_pend && hbm_rd_resp_valid));
  a_space:      assert property (@(posedge clk) disable iff (!rst_n)
    f_in_valid |-> f_in_ready);
  a_resp_tag:   assert property (@(posedge clk) disable iff (!rst_n)
    hbm_rd_resp_valid |-> tag_out_valid);

endmodule
