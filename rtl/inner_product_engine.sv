// inner_product_engine: dot products between each streamed key and all query heads.
//
// Keys arrive from the read arbiter in token order. For every key the engine
// computes HEADS dot products of DIM signed ELEM_W-bit elements, HP heads per
// cycle, so one key takes HEADS/HP cycles (4 with the defaults 64/16). Each cycle
// it emits one beat of HP partial results with the key's token, the head group and
// flags for the key's last group and the scan's last key; the reduction unit
// combines the groups into one score. The engine reads the query buffer's group
// read port combinationally (q_group -> q_heads).
//
// The published design names this engine and its role; the per-cycle parallelism
// (HP heads x DIM multipliers), the integer arithmetic and the single output
// register are this implementation's choices. Products are exact: a DOT_W-bit
// result cannot overflow.
//
// Timing: output is registered; a new beat is produced whenever the output
// register is empty or being drained; key_ready is high on the key's last group.
module inner_product_engine
  import mp_pkg::*;
#(
  parameter int unsigned HEADS  = HEADS_DEF,
  parameter int unsigned DIM    = DIM_DEF,
  parameter int unsigned ELEM_W = ELEM_W_DEF,
  parameter int unsigned HP     = HP_DEF,
  parameter int unsigned DOT_W  = 2 * ELEM_W + $clog2(DIM) + 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // keys
  input  logic                                  key_valid,
  output logic                                  key_ready,
  input  tok_t                                  key_token,
  input  logic [DIM*ELEM_W-1:0]                 key_data,
  input  logic                                  key_last,
  // query buffer group read port
  output logic [$clog2(HEADS/HP+1)-1:0]         q_group,
  input  logic [HP-1:0][DIM*ELEM_W-1:0]         q_heads,
  // partial results
  output logic                                  out_valid,
  input  logic                                  out_ready,
  output tok_t                                  out_token,
  output logic [$clog2(HEADS/HP+1)-1:0]         out_group,
  output logic [HP-1:0][DOT_W-1:0]              out_dots,
  output logic                                  out_key_end,
  output logic                                  out_last
);
  localparam int unsigned G  = HEADS / HP;
  localparam int unsigned GW = $clog2(G + 1);

  logic [GW-1:0]                  g;
  logic signed [DOT_W-1:0]        dots [HP];
  wire                            adv = key_valid && (!out_valid || out_ready);

  assign q_group   = g;
  assign key_ready = adv && (g == GW'(G - 1));

  always_comb begin
    for (int j = 0; j < HP; j++) begin
      dots[j] = '0;
      for (int d = 0; d < DIM; d++) begin
        dots[j] += DOT_W'($signed(q_heads[j][d*ELEM_W +: ELEM_W]) *
                          $signed(key_data[d*ELEM_W +: ELEM_W]));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g           <= '0;
      out_valid   <= 1'b0;
      out_token   <= '0;
      out_group   <= '0;
      out_dots    <= '0;
      out_key_end <= 1'b0;
      out_last    <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adv) begin
        out_valid   <= 1'b1;
        out_token   <= key_token;
        out_group   <= g;
        for (int j = 0; j < HP; j++) out_dots[j] <= dots[j];
        out_key_end <= (g == GW'(G - 1));
        out_last    <= key_last && (g == GW'(G - 1));
        g           <= (g == GW'(G - 1)) ? '0 : g + 1'b1;
      end
    end
  end

  initial assert (HEADS % HP == 0) else $error("HEADS must be a multiple of HP");

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_dots) && $stable(out_token));

endmodule
