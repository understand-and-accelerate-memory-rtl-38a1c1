// pipe_divider: fully pipelined unsigned integer divider, one quotient bit per
// stage (restoring division), accepting one division per cycle.
//
// q = num / den after NW cycles; den = 0 gives an all-ones quotient. A payload of
// PW bits travels with each division. There is no back-pressure: the pipeline
// always advances, so the consumer must always accept out_valid. Used by the BM25
// scorer for its per-posting term-frequency normalisation.
module pipe_divider #(
  parameter int unsigned NW = 32,   // numerator / quotient width
  parameter int unsigned DW = 16,   // denominator width
  parameter int unsigned PW = 1     // payload width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [NW-1:0] in_num,
  input  logic [DW-1:0] in_den,
  input  logic [PW-1:0] in_payload,
  output logic          out_valid,
  output logic [NW-1:0] out_q,
  output logic [PW-1:0] out_payload
);
  // stage s holds the state after quotient bit NW-1-s has been decided
  logic          v   [NW+1];
  logic [NW-1:0] num [NW+1];   // remaining numerator bits, shifted left
  logic [DW:0]   rem [NW+1];
  logic [DW-1:0] den [NW+1];
  logic [NW-1:0] q   [NW+1];
  logic [PW-1:0] pl  [NW+1];

  assign v[0]   = in_valid;
  assign num[0] = in_num;
  assign rem[0] = '0;
  assign den[0] = in_den;
  assign q[0]   = '0;
  assign pl[0]  = in_payload;

  for (genvar s = 0; s < NW; s++) begin : g_stage
    logic [DW+1:0] trial;
    logic          fits;
    always_comb begin
      trial = {rem[s], num[s][NW-1]};
      fits  = (trial >= {2'b00, den[s]});
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v[s+1] <= 1'b0;
      else        v[s+1] <= v[s];
    end
    always_ff @(posedge clk) begin
      num[s+1] <= num[s] << 1;
      rem[s+1] <= fits ? (DW+1)'(trial - {2'b00, den[s]}) : trial[DW:0];
      den[s+1] <= den[s];
      q[s+1]   <= {q[s][NW-2:0], fits};
      pl[s+1]  <= pl[s];
    end
  end

  assign out_valid   = v[NW];
  assign out_q       = q[NW];
  assign out_payload = pl[NW];

endmodule
