// write_arbiter: routes each key write to the storage tier that owns its token ID.
//
// Tiers follow the published partition: BRAM holds tokens 0-16383, URAM tokens
// 16384-65535 and HBM every token from 65536 on (defaults BRAM_TOKENS = 16384,
// URAM_TOKENS = 49152). The arbiter turns the token ID into the tier-local
// address (token minus the tier's first token) and raises exactly one tier's write
// strobe. On-chip tiers accept a write every cycle; an HBM write waits for
// hbm_wr_ready, and the arbiter passes that stall back to the key loader.
// Purely combinational: no added latency.
module write_arbiter
  import mp_pkg::*;
#(
  parameter int unsigned KEY_W       = DIM_DEF * ELEM_W_DEF,
  parameter int unsigned BRAM_TOKENS = BRAM_TOKENS_DEF,
  parameter int unsigned URAM_TOKENS = URAM_TOKENS_DEF
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // from the key loader
  input  logic                           in_valid,
  output logic                           in_ready,
  input  tok_t                           in_token,
  input  logic [KEY_W-1:0]               in_key,
  // BRAM tier write port
  output logic                           bram_we,
  output logic [$clog2(BRAM_TOKENS)-1:0] bram_waddr,
  output logic [KEY_W-1:0]               bram_wdata,
  // URAM tier write port
  output logic                           uram_we,
  output logic [$clog2(URAM_TOKENS)-1:0] uram_waddr,
  output logic [KEY_W-1:0]               uram_wdata,
  // HBM tier write port
  output logic                           hbm_wr_valid,
  input  logic                           hbm_wr_ready,
  output tok_t                           hbm_wr_addr,
  output logic [KEY_W-1:0]               hbm_wr_data
);
  tier_e tier;
  tok_t  uram_off, hbm_off;

  always_comb begin
    tier     = tier_of(in_token, BRAM_TOKENS, URAM_TOKENS);
    uram_off = in_token - tok_t'(BRAM_TOKENS);
    hbm_off  = in_token - tok_t'(BRAM_TOKENS + URAM_TOKENS);

    bram_we      = in_valid && (tier == TIER_BRAM);
    bram_waddr   = in_token[$clog2(BRAM_TOKENS)-1:0];
    bram_wdata   = in_key;
    uram_we      = in_valid && (tier == TIER_URAM);
    uram_waddr   = uram_off[$clog2(URAM_TOKENS)-1:0];
    uram_wdata   = in_key;
    hbm_wr_valid = in_valid && (tier == TIER_HBM);
    hbm_wr_addr  = hbm_off;
    hbm_wr_data  = in_key;

    in_ready     = (tier == TIER_HBM) ? hbm_wr_ready : 1'b1;
  end

  a_one_tier: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({bram_we, uram_we, hbm_wr_valid}));

endmodule
