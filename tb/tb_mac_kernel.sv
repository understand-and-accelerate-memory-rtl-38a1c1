// tb_mac_kernel: Memory-as-Context kernel at reduced size (8-element embeddings,
// 16-token segments, up to 8 memory embeddings).
//
// Each case streams a random segment, projection matrix and memory set with random
// gaps on every input stream and random output back-pressure, and checks the
// output embedding element by element against
//   (a) the same integer computation done here (mean pooling, projection, scores,
//       2^-f ~ 1 - f/2 weights, rounded division): must match exactly;
//   (b) the real-valued softmax blend with exact 2^-x weights: must agree within
//       the error of the linear exponential approximation.
// Cases: no memory (first segment), a single memory, a full memory buffer, and
// random sizes. The scale is chosen per case so that scores spread over a few
// octaves. Counts each mechanism and fails if one never happened.
module tb_mac_kernel;
  localparam int unsigned D = 8, EW = 8, SL = 16, NM = 8;
  localparam int unsigned KW = D * EW;

  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] n_mem = '0;
  logic [31:0] scale = '0;
  logic busy, done;
  logic seg_valid = 0, seg_ready, w_valid = 0, w_ready, mem_valid = 0, mem_ready;
  logic [KW-1:0] seg_data = '0, w_data = '0, mem_data = '0;
  logic out_valid, out_ready = 0;
  logic [KW-1:0] out_data;

  mac_kernel #(.D(D), .EW(EW), .SEG_LEN(SL), .NMEM(NM)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int m_empty = 0, m_full = 0, m_in_stall = 0, m_out_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if ((seg_ready && !seg_valid) || (mem_ready && !mem_valid) || (w_ready && !w_valid)) m_in_stall++;
    if (out_valid && !out_ready) m_out_stall++;
    out_ready <= ($urandom_range(0, 99) < 60);
  end

  logic [KW-1:0] seg [SL];
  logic [KW-1:0] wm  [D];
  logic [KW-1:0] mem [NM];

  function automatic longint el(logic [KW-1:0] v, int d);
    return longint'($signed(v[d*EW +: EW]));
  endfunction

  task automatic run_case(int nm, bit extreme);
    longint xbar [D], q [D], s [NM], acc [D], ref_o [D];
    longint smax, wsum;
    real racc [D], rsum;
    longint spread, sc;
    logic [KW-1:0] got;
    bit fin;
    for (int t = 0; t < SL; t++) for (int d = 0; d < D; d++) seg[t][d*EW +: EW] = extreme ? 8'h7f : 8'($urandom);
    for (int r = 0; r < D; r++) for (int d = 0; d < D; d++) wm[r][d*EW +: EW] = extreme ? 8'h80 : 8'($urandom);
    for (int i = 0; i < NM; i++) for (int d = 0; d < D; d++) mem[i][d*EW +: EW] = 8'($urandom);
    // reference: segment mean (floor), projection, scores
    for (int d = 0; d < D; d++) begin
      longint sum = 0;
      for (int t = 0; t < SL; t++) sum += el(seg[t], d);
      xbar[d] = sum >>> $clog2(SL);
    end
    for (int r = 0; r < D; r++) begin
      q[r] = 0;
      for (int j = 0; j < D; j++) q[r] += el(wm[r], j) * xbar[j];
    end
    smax = -(64'sd1 <<< 62);
    for (int i = 0; i < nm; i++) begin
      s[i] = 0;
      for (int d = 0; d < D; d++) s[i] += q[d] * el(mem[i], d);
      if (s[i] > smax) smax = s[i];
    end
    spread = 1;
    for (int i = 0; i < nm; i++) if (smax - s[i] > spread) spread = smax - s[i];
    sc = (64'sd4 <<< 32) / spread;
    if (sc < 1) sc = 1;
    if (sc > 64'sd2147483647) sc = 64'sd2147483647;
    // reference weights and blend
    wsum = 0; rsum = 0;
    for (int d = 0; d < D; d++) begin acc[d] = 0; racc[d] = 0; end
    for (int i = 0; i < nm; i++) begin
      longint y = ((smax - s[i]) * sc) >>> 16;
      longint n = y >> 16, f = y & 16'hffff;
      longint w = (n >= 17) ? 0 : ((65536 - (f >> 1)) >> n);
      real rw = 2.0 ** (-(real'(smax - s[i]) * real'(sc) / 4294967296.0));
      wsum += w; rsum += rw;
      for (int d = 0; d < D; d++) begin acc[d] += w * el(mem[i], d); racc[d] += rw * real'(el(mem[i], d)); end
    end
    for (int d = 0; d < D; d++) begin
      longint mag = (acc[d] < 0) ? -acc[d] : acc[d];
      if (nm == 0) ref_o[d] = 0;
      else begin
        longint qq = (mag + (wsum >> 1)) / wsum;
        ref_o[d] = (acc[d] < 0) ? -qq : qq;
      end
    end
    // drive
    @(negedge clk);
    n_mem = nm; scale = 32'(sc); start = 1;
    @(negedge clk) start = 0;
    fin = 0;
    fork
      for (int t = 0; t < SL; t++) begin
        bit hs;
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        seg_valid = 1; seg_data = seg[t];
        do begin #1 hs = seg_ready; @(posedge clk); end while (!hs);
        @(negedge clk) seg_valid = 0;
      end
      for (int r = 0; r < D; r++) begin
        bit hs;
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        w_valid = 1; w_data = wm[r];
        do begin #1 hs = w_ready; @(posedge clk); end while (!hs);
        @(negedge clk) w_valid = 0;
      end
      for (int i = 0; i < nm; i++) begin
        bit hs;
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        mem_valid = 1; mem_data = mem[i];
        do begin #1 hs = mem_ready; @(posedge clk); end while (!hs);
        @(negedge clk) mem_valid = 0;
      end
      begin
        do @(posedge clk); while (!(out_valid && out_ready));
        got = out_data;
        fin = 1;
      end
    join
    @(negedge clk);
    check(fin, "output delivered");
    for (int d = 0; d < D; d++) begin
      real rv = (nm == 0) ? 0.0 : racc[d] / rsum;
      real err = real'(el(got, d)) - rv;
      check(el(got, d) == ref_o[d], $sformatf("nm=%0d element %0d: %0d want %0d", nm, d, el(got, d), ref_o[d]));
      if (err < 0) err = -err;
      check(err <= 24.0, $sformatf("nm=%0d element %0d: %0d vs exact softmax %f", nm, d, el(got, d), rv));
    end
    repeat (2) @(negedge clk);
    check(!busy, "idle after output");
    if (nm == 0) m_empty++;
    if (nm == NM) m_full++;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run_case(0, 0);
    run_case(1, 0);
    run_case(NM, 0);
    run_case(NM, 1);
    for (int c = 0; c < 12; c++) run_case($urandom_range(1, NM), 0);
    $display("mechanisms: empty_memory=%0d full_buffer=%0d input_gaps=%0d output_stalls=%0d",
             m_empty, m_full, m_in_stall, m_out_stall);
    check(m_empty > 0 && m_full > 0 && m_in_stall > 0 && m_out_stall > 0, "every mechanism seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
