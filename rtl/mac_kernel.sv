// mac_kernel: Memory-as-Context kernel. For each incoming segment of a long input
// it builds a query from the segment and retrieves a blend of the past memory
// embeddings most relevant to it (cross attention); the blended embedding goes
// back to the GPU and is written back to HBM as memory for later segments.
//
// Dataflow (the published block diagram: Segment Loader -> Query Linear Projection
// -> Cross Attention <- Memory Loader, Cross Attention -> Output Memory Embedding):
//   segment loader   SEG_LEN embeddings of D signed EW-bit elements arrive on seg_*;
//                    they are summed, and the mean xbar = sum >>> log2(SEG_LEN)
//                    (floor) is the segment summary.
//   query projection D weight rows arrive on w_* (from HBM), one per beat; row r
//                    gives q[r] = sum_j W[r][j] * xbar[j] in one cycle.
//   memory loader    n_mem past memory embeddings arrive on mem_* in parallel with
//                    the two steps above and are buffered on chip (up to NMEM).
//   cross attention  pass 1 (n_mem cycles): s_i = q . m_i and their maximum;
//                    pass 2 (n_mem cycles): w_i = 2^-((s_max - s_i) * scale), with
//                    2^-f approximated by 1 - f/2 on each octave, acc += w_i * m_i
//                    and sum += w_i; then D divisions out[d] = round(acc[d] / sum)
//                    through a pipelined divider (D + AW cycles, AW = 34 at the
//                    defaults).
//   output           one beat out_data of D signed EW-bit elements, then `done`.
// `scale` (unsigned Q0.32, down to 2^-32) folds log2(e)/sqrt(D) and the squared
// quantisation step of the INT8 data into one factor, so the weights are
// softmax(s * scale * ln 2); integer scores of full-range INT8 data reach 2^30 and
// more, hence the 32 fraction bits. With n_mem = 0 (the first
// segment, no memory yet) the output is the zero vector.
//
// Timing: start -> busy; load phase max(SEG_LEN + D, n_mem) beats when the streams
// keep up; then about 2 * n_mem + D + AW cycles; out_valid holds until out_ready.
// `done` pulses with the output handshake.
//
// Follows the published design: the four stages, their order, the HBM-fed loaders,
// the segment length 1024 and FIFO-stream interfaces. This implementation's own
// choices: mean pooling of the segment before one linear projection (the published
// text says only that the projection turns the segment into the query), integer
// arithmetic, the base-2 linear-octave exponential, the two-pass softmax over an
// on-chip memory buffer, the embedding size D = 128 and the memory size NMEM = 256.
module mac_kernel #(
  parameter int unsigned D       = 128,   // embedding elements
  parameter int unsigned EW      = 8,     // signed element width
  parameter int unsigned SEG_LEN = 1024,  // tokens per segment (power of two)
  parameter int unsigned NMEM    = 256    // past memory embeddings held on chip
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [15:0]          n_mem,     // memory embeddings this segment (<= NMEM)
  input  logic [31:0]          scale,     // unsigned Q0.32
  output logic                 busy,
  output logic                 done,
  // segment loader
  input  logic                 seg_valid,
  output logic                 seg_ready,
  input  logic [D*EW-1:0]      seg_data,
  // projection weights, row r of W per beat, rows 0 .. D-1
  input  logic                 w_valid,
  output logic                 w_ready,
  input  logic [D*EW-1:0]      w_data,
  // memory loader
  input  logic                 mem_valid,
  output logic                 mem_ready,
  input  logic [D*EW-1:0]      mem_data,
  // output memory embedding
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [D*EW-1:0]      out_data
);
  localparam int unsigned LSEG = $clog2(SEG_LEN);
  localparam int unsigned SSW  = EW + LSEG;              // segment sum
  localparam int unsigned QW   = 2 * EW + $clog2(D);     // query element
  localparam int unsigned SW   = QW + EW + $clog2(D) + 1; // score
  localparam int unsigned WW   = 17;                     // weight, Q1.16
  localparam int unsigned AW   = WW + EW + $clog2(NMEM) + 1;
  localparam int unsigned UW   = WW + $clog2(NMEM) + 1;  // weight sum
  localparam int unsigned MI   = $clog2(NMEM + 1);
  localparam int unsigned DI   = $clog2(D + 1);

  typedef enum logic [2:0] {M_IDLE, M_LOAD, M_SCORE, M_WEIGHT, M_DIV, M_OUT} mstate_e;
  mstate_e state;

  logic [15:0]           n_mem_r;
  logic [31:0]           scale_r;
  logic [LSEG:0]         seg_cnt;
  logic [DI-1:0]         w_cnt;
  logic [MI-1:0]         mem_cnt, idx;
  logic signed [SSW-1:0] seg_sum [D];
  logic signed [QW-1:0]  q       [D];
  logic [D*EW-1:0]       mem_buf [NMEM];
  logic signed [SW-1:0]  sc_buf  [NMEM];
  logic signed [SW-1:0]  s_max;
  logic signed [AW-1:0]  acc     [D];
  logic [UW-1:0]         wsum;
  logic signed [EW-1:0]  out_vec [D];
  logic [DI-1:0]         div_in, div_out;

  wire seg_done = (seg_cnt == (LSEG+1)'(SEG_LEN));
  wire q_done   = (w_cnt == DI'(D));
  wire mem_done = (32'(mem_cnt) >= 32'(n_mem_r));

  assign seg_ready = (state == M_LOAD) && !seg_done;
  assign w_ready   = (state == M_LOAD) && seg_done && !q_done;
  assign mem_ready = (state == M_LOAD) && !mem_done;
  assign busy      = (state != M_IDLE);

  // ---------------- segment summary and query projection ----------------
  logic signed [EW-1:0] xbar [D];
  always_comb
    for (int d = 0; d < D; d++) xbar[d] = EW'(seg_sum[d] >>> LSEG);

  logic signed [QW-1:0] q_row;
  always_comb begin
    q_row = '0;
    for (int j = 0; j < D; j++)
      q_row += QW'($signed(w_data[j*EW +: EW]) * xbar[j]);
  end

  // ---------------- cross attention: scores and weights ----------------
  logic [D*EW-1:0]      m_cur;
  logic signed [SW-1:0] s_cur;
  assign m_cur = mem_buf[idx[$clog2(NMEM)-1:0]];
  always_comb begin
    s_cur = '0;
    for (int d = 0; d < D; d++)
      s_cur += SW'(q[d] * $signed(m_cur[d*EW +: EW]));
  end

  // w = 2^-(t * scale), t = s_max - s_i >= 0; y = t * scale in Q.16
  logic [SW+32:0] y;
  logic [15:0]    y_f;
  logic [WW-1:0]  w_cur;
  always_comb begin
    y     = ((SW+33)'(s_max - sc_buf[idx[$clog2(NMEM)-1:0]]) * (SW+33)'(scale_r)) >> 16;
    y_f   = y[15:0];
    w_cur = ((y >> 16) >= 17) ? '0 : ((WW'(17'h10000) - WW'(y_f >> 1)) >> (y >> 16));
  end

  // ---------------- normalisation: acc / sum, rounded, sign-magnitude ----------------
  // The result is a convex blend of EW-bit elements, so its magnitude is at most
  // 2^(EW-1): only the low EW bits of the quotient are used.
  logic             dv_in_valid, dv_out_valid;
  logic [AW-1:0]    dv_num, dv_q;
  logic [DI:0]      dv_pl_out;
  logic             neg_in;
  logic [AW-1:0]    mag_in;
  always_comb begin
    neg_in = acc[div_in[$clog2(D)-1:0]] < 0;
    mag_in = neg_in ? AW'(-acc[div_in[$clog2(D)-1:0]]) : AW'(acc[div_in[$clog2(D)-1:0]]);
    dv_num = mag_in + AW'(wsum >> 1);
  end
  assign dv_in_valid = (state == M_DIV) && (div_in < DI'(D));

  pipe_divider #(.NW(AW), .DW(UW), .PW(DI + 1)) u_div (
    .clk, .rst_n,
    .in_valid(dv_in_valid), .in_num(dv_num), .in_den(wsum), .in_payload({div_in, neg_in}),
    .out_valid(dv_out_valid), .out_q(dv_q), .out_payload(dv_pl_out)
  );

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= M_IDLE;
      n_mem_r   <= '0;
      scale_r   <= '0;
      seg_cnt   <= '0;
      w_cnt     <= '0;
      mem_cnt   <= '0;
      idx       <= '0;
      div_in    <= '0;
      div_out   <= '0;
      wsum      <= '0;
      s_max     <= '0;
      out_valid <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        M_IDLE: if (start) begin
          state   <= M_LOAD;
          n_mem_r <= (32'(n_mem) > NMEM) ? 16'(NMEM) : n_mem;
          scale_r <= scale;
          seg_cnt <= '0;
          w_cnt   <= '0;
          mem_cnt <= '0;
        end
        M_LOAD: begin
          if (seg_valid && seg_ready) seg_cnt <= seg_cnt + 1'b1;
          if (w_valid && w_ready)     w_cnt   <= w_cnt + 1'b1;
          if (mem_valid && mem_ready) mem_cnt <= mem_cnt + 1'b1;
          if (q_done && mem_done) begin
            idx   <= '0;
            s_max <= {1'b1, {(SW-1){1'b0}}};
            wsum  <= '0;
            state <= (n_mem_r == '0) ? M_OUT : M_SCORE;
            if (n_mem_r == '0) out_valid <= 1'b1;
          end
        end
        M_SCORE: begin
          if (s_cur > s_max) s_max <= s_cur;
          if (32'(idx) == 32'(n_mem_r) - 1) begin
            idx   <= '0;
            state <= M_WEIGHT;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        M_WEIGHT: begin
          wsum <= wsum + UW'(w_cur);
          if (32'(idx) == 32'(n_mem_r) - 1) begin
            state   <= M_DIV;
            div_in  <= '0;
            div_out <= '0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        M_DIV: begin
          if (div_in < DI'(D)) div_in <= div_in + 1'b1;
          if (dv_out_valid) begin
            div_out <= div_out + 1'b1;
            if (div_out == DI'(D - 1)) begin
              state     <= M_OUT;
              out_valid <= 1'b1;
            end
          end
        end
        M_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          done      <= 1'b1;
          state     <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  // data registers (no reset: every one is written before it is read)
  always_ff @(posedge clk) begin
    if (state == M_IDLE && start) begin
      for (int d = 0; d < D; d++) begin
        seg_sum[d] <= '0;
        acc[d]     <= '0;
        out_vec[d] <= '0;
      end
    end
    if (state == M_LOAD) begin
      if (seg_valid && seg_ready)
        for (int d = 0; d < D; d++) seg_sum[d] <= seg_sum[d] + SSW'($signed(seg_data[d*EW +: EW]));
      if (w_valid && w_ready) q[w_cnt[$clog2(D)-1:0]] <= q_row;
      if (mem_valid && mem_ready) mem_buf[mem_cnt[$clog2(NMEM)-1:0]] <= mem_data;
    end
    if (state == M_SCORE) sc_buf[idx[$clog2(NMEM)-1:0]] <= s_cur;
    if (state == M_WEIGHT)
      for (int d = 0; d < D; d++)
        acc[d] <= acc[d] + AW'($signed({1'b0, w_cur}) * $signed(m_cur[d*EW +: EW]));
    if (state == M_DIV && dv_out_valid)
      out_vec[dv_pl_out[$clog2(D):1]] <= dv_pl_out[0] ? -EW'(dv_q) : EW'(dv_q);
  end

  always_comb
    for (int d = 0; d < D; d++) out_data[d*EW +: EW] = out_vec[d];

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
