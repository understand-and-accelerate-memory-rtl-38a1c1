// key_loader: numbers incoming key vectors and hands them to the write arbiter.
//
// The GPU's Prepare-Memory step produces compressed key (indexing) vectors: the
// whole prompt's keys during prefill, then one new key per decoded token. They
// arrive through HBM as a stream, one key per beat. The loader gives each key the
// next token ID (0, 1, 2, ...), so keys are stored in token order and smaller IDs
// end up in the faster tiers. `clear` starts a new sequence at token 0.
//
// A key arriving when MAX_TOKENS keys are already stored is dropped and sets the
// sticky `overflow` flag: the published design stops offloading beyond 1M tokens
// and falls back to GPU-only execution, so the host reads this flag to switch.
//
// Timing: one output register; a key is accepted each cycle the register is free
// or being drained (in_ready = !wr_valid || wr_ready). `n_tokens` counts keys
// accepted; `idle` is high when no key is waiting to be written.
module key_loader
  import mp_pkg::*;
#(
  parameter int unsigned KEY_W      = DIM_DEF * ELEM_W_DEF,
  parameter int unsigned MAX_TOKENS = MAX_TOKENS_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  // keys from HBM
  input  logic             key_in_valid,
  output logic             key_in_ready,
  input  logic [KEY_W-1:0] key_in_data,
  // to the write arbiter
  output logic             wr_valid,
  input  logic             wr_ready,
  output tok_t             wr_token,
  output logic [KEY_W-1:0] wr_key,
  // status
  output tok_t             n_tokens,
  output logic             overflow,
  output logic             idle
);
  wire full   = (n_tokens >= tok_t'(MAX_TOKENS));
  assign key_in_ready = !wr_valid || wr_ready;
  assign idle         = !wr_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_valid <= 1'b0;
      wr_token <= '0;
      wr_key   <= '0;
      n_tokens <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      wr_valid <= 1'b0;
      n_tokens <= '0;
      overflow <= 1'b0;
    end else begin
      if (wr_valid && wr_ready) wr_valid <= 1'b0;
      if (key_in_valid && key_in_ready) begin
        if (full) begin
          overflow <= 1'b1;
        end else begin
          wr_valid <= 1'b1;
          wr_token <= n_tokens;
          wr_key   <= key_in_data;
          n_tokens <= n_tokens + 1'b1;
        end
      end
    end
  end

  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n || clear)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_token) && $stable(wr_key));

endmodule
