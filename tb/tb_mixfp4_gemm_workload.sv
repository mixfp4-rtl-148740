// tb_mixfp4_gemm_workload -- MixFP4 quantisation plus a GEMM tile of
// LLM-layer size through the 4x4 tensor core.
//
// The testbench quantises its operands the way MixFP4 prescribes and then
// runs them through the tensor core at its default size:
//   * a per-tensor scale s32 = max|X| / 2688 (2688 = 6 * 448 = 7 * 384)
//     maps each tensor row into range;
//   * for every 16-element block two candidates are formed: E2M1 with the
//     E4M3 block scale round(blockmax / 6), and E1M2 in its INT4 form
//     (levels 0..7) with block scale round(blockmax / 7); each candidate is
//     quantised to the nearest level and dequantised, and the one with the
//     smaller squared error is kept, its choice stored in bit 7 of the
//     packed scale.
// The tile is D (4 x 4) = W (4 x K) * X (K x 4) with K = 4096 (the hidden
// size of an 8B Llama/Qwen model, i.e. 256 blocks per output element): four
// weight rows, drawn with mixed statistics (some blocks flat, some with one
// large outlier, so both formats get chosen), times four activation vectors
// (a batch of four tokens, Gaussian with occasional outliers).
//
// Checks: all 16 outputs equal, bit for bit, an FP32 accumulation of the
// exact block products computed here from the quantised codes; the tile
// takes one block per cycle with a two-cycle latency; the chosen format
// never has a larger block error than plain E2M1 (NVFP4); both formats are
// chosen somewhere; and every dequantised output is close to the
// unquantised product (error below 2% of sum |w_i * x_i|). The E4M3
// rounding here is to nearest with ties away from zero, the FP4 rounding to
// the nearest level (lower level on a tie). The quantiser is this
// testbench's model of the software side; it is not part of the RTL.
module tb_mixfp4_gemm_workload;
  import mixfp4_pkg::*;
  import mixfp4_ref_pkg::*;

  localparam int V      = 16;
  localparam int K      = 4096;
  localparam int NBLK   = K / V;
  localparam int M      = 4;   // weight rows
  localparam int N      = 4;   // activation vectors

  logic          clk = 1'b0;
  logic          rst_n;
  logic          in_valid, in_first;
  fp4_t          a_elems [M][V];
  scale_packed_t a_scale [M];
  fp4_t          b_elems [N][V];
  scale_packed_t b_scale [N];
  fp32_t         c_in    [M][N];
  logic          out_valid;
  fp32_t         d_out   [M][N];
  logic          ovf_flag, inexact_flag;

  mixfp4_tensor_core dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .a_elems(a_elems), .a_scale(a_scale), .b_elems(b_elems), .b_scale(b_scale),
    .c_in(c_in), .out_valid(out_valid), .d_out(d_out),
    .ovf_flag(ovf_flag), .inexact_flag(inexact_flag));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // Quantised tensors: codes, packed scales and per-tensor scales.
  real           x   [N][K];
  real           w   [M][K];
  logic [3:0]    xq  [N][K];
  logic [7:0]    xs  [N][NBLK];
  real           xs32 [N];
  logic [3:0]    wq  [M][K];
  logic [7:0]    ws  [M][NBLK];
  real           ws32 [M];
  int            n_e1m2 = 0, n_e2m1 = 0;

  localparam real E2M1_LEVELS [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};

  // Nearest unsigned E4M3 code (bias 7, max 448), ties away from zero.
  function automatic logic [6:0] to_e4m3(input real v);
    int  e, mant;
    real f;
    if (v <= 0.0) return 7'd0;
    if (v >= 448.0) return 7'h7e;
    e = 0;
    f = v;
    while (f >= 2.0) begin f = f / 2.0; e++; end
    while (f < 1.0 && e > -6) begin f = f * 2.0; e--; end
    if (f < 1.0) begin
      mant = int'($floor(v * 512.0 + 0.5));        // subnormal, units of 2^-9
      return 7'(mant);                              // 8 becomes the smallest normal
    end
    mant = int'($floor((f - 1.0) * 8.0 + 0.5));
    if (mant == 8) begin mant = 0; e++; end
    if (e + 7 > 15 || (e + 7 == 15 && mant == 7)) return 7'h7e;
    return 7'(((e + 7) << 3) | mant);
  endfunction

  function automatic real sq(input real v);
    return v * v;
  endfunction

  // Algorithm: quantise one block of 16 values (already divided by s32).
  task automatic quant_block(input real blk [V], output logic [3:0] q [V],
                             output logic [7:0] scale, output real err_mix,
                             output real err_e2m1);
    real         bmax, s2, s1, e2, e1, v, best, d;
    logic [6:0]  c2, c1;
    logic [3:0]  q2 [V];
    logic [3:0]  q1 [V];
    int          bi, lv;
    bmax = 0.0;
    for (int i = 0; i < V; i++) if ((blk[i] < 0 ? -blk[i] : blk[i]) > bmax)
      bmax = (blk[i] < 0 ? -blk[i] : blk[i]);
    c2 = to_e4m3(bmax / 6.0);  s2 = e4m3_value(c2);
    c1 = to_e4m3(bmax / 7.0);  s1 = e4m3_value(c1);
    e2 = 0.0; e1 = 0.0;
    for (int i = 0; i < V; i++) begin
      v = (blk[i] < 0) ? -blk[i] : blk[i];
      // E2M1 candidate
      bi = 0;
      if (s2 > 0.0) begin
        best = 1.0e30;
        for (int l = 0; l < 8; l++) begin
          d = (v / s2 - E2M1_LEVELS[l]);
          if (d < 0) d = -d;
          if (d < best) begin best = d; bi = l; end
        end
      end
      q2[i] = {blk[i] < 0 && bi != 0, 3'(bi)};
      e2 += sq(fp4_value(q2[i], 1'b0) * s2 - blk[i]);
      // E1M2 candidate in INT4 form
      lv = (s1 > 0.0) ? int'($floor(v / s1 + 0.5)) : 0;
      if (lv > 7) lv = 7;
      q1[i] = {blk[i] < 0 && lv != 0, 3'(lv)};
      e1 += sq(fp4_value(q1[i], 1'b1) * s1 - blk[i]);
    end
    err_e2m1 = e2;
    if (e2 < e1) begin
      q = q2; scale = {1'b0, c2}; err_mix = e2; n_e2m1++;
    end else begin
      q = q1; scale = {1'b1, c1}; err_mix = e1; n_e1m2++;
    end
  endtask

  // Quantise a whole tensor row; returns its per-tensor scale.
  task automatic quant_row(input real row [K], output logic [3:0] q [K],
                           output logic [7:0] s [NBLK], output real s32);
    real         amax, blk [V], em, e2;
    logic [3:0]  qb [V];
    amax = 0.0;
    for (int i = 0; i < K; i++) if ((row[i] < 0 ? -row[i] : row[i]) > amax)
      amax = (row[i] < 0 ? -row[i] : row[i]);
    s32 = amax / 2688.0;
    for (int b = 0; b < NBLK; b++) begin
      for (int i = 0; i < V; i++) blk[i] = row[b*V + i] / s32;
      quant_block(blk, qb, s[b], em, e2);
      checks++;
      if (em > e2) begin
        failures++;
        $display("FAIL block %0d: chosen error %g above E2M1 error %g", b, em, e2);
      end
      for (int i = 0; i < V; i++) q[b*V + i] = qb[i];
    end
  endtask

  // Roughly Gaussian sample (sum of uniforms).
  function automatic real gauss();
    real acc = 0.0;
    for (int i = 0; i < 4; i++) acc += real'($urandom % 100000) / 100000.0;
    return (acc - 2.0) * 1.7;
  endfunction

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real        row [K];
    logic [3:0] rq [K];
    logic [7:0] rs [NBLK];
    real        rsc;
    real        exact, mag, deq, sum, scaled, dot, rel;
    fp32_t      ref_acc [M][N];
    longint     t_start, t_out;
    int         n_out;

    rst_n = 1'b0; in_valid = 1'b0; in_first = 1'b0;
    for (int i = 0; i < M; i++) begin
      a_scale[i] = '0;
      for (int k = 0; k < V; k++) a_elems[i][k] = '0;
      for (int j = 0; j < N; j++) c_in[i][j] = '0;
    end
    for (int j = 0; j < N; j++) begin
      b_scale[j] = '0;
      for (int k = 0; k < V; k++) b_elems[j][k] = '0;
    end

    // Activation vectors: Gaussian with occasional outliers.
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < K; i++) begin
        row[i] = gauss();
        if ($urandom % 97 == 0) row[i] = row[i] * 12.0;
      end
      x[j] = row;
      quant_row(row, rq, rs, rsc);
      xq[j] = rq;  xs[j] = rs;  xs32[j] = rsc;
    end

    // Weight rows: per block either flat (uniform) or outlier-heavy.
    for (int r = 0; r < M; r++) begin
      for (int b = 0; b < NBLK; b++) begin
        logic flat;
        flat = ($urandom % 2) == 0;
        for (int i = 0; i < V; i++) begin
          if (flat) row[b*V + i] = (real'($urandom % 2001) - 1000.0) / 1000.0;
          else      row[b*V + i] = gauss() * 0.2;
        end
        if (!flat) row[b*V + int'($urandom % V)] = 3.0 * ((($urandom % 2) != 0) ? 1.0 : -1.0);
      end
      w[r] = row;
      quant_row(row, rq, rs, rsc);
      wq[r] = rq;  ws[r] = rs;  ws32[r] = rsc;
    end

    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Stream the 256 K blocks of the tile and collect the result.
    t_start = -1;
    t_out   = -1;
    n_out   = 0;
    fork
      begin
        for (int b = 0; b < NBLK; b++) begin
          for (int i = 0; i < M; i++) begin
            for (int k = 0; k < V; k++) a_elems[i][k] = wq[i][b*V + k];
            a_scale[i] = ws[i][b];
          end
          for (int j = 0; j < N; j++) begin
            for (int k = 0; k < V; k++) b_elems[j][k] = xq[j][b*V + k];
            b_scale[j] = xs[j][b];
          end
          in_valid = 1'b1;
          in_first = (b == 0);
          for (int i = 0; i < M; i++)
            for (int j = 0; j < N; j++) begin
              dot = 0.0;
              for (int k = 0; k < V; k++)
                dot += fp4_value(a_elems[i][k], a_scale[i][7]) * fp4_value(b_elems[j][k], b_scale[j][7]);
              scaled = dot * e4m3_value(a_scale[i][6:0]) * e4m3_value(b_scale[j][6:0]);
              sum = ((b == 0) ? 0.0 : fp32_to_real(ref_acc[i][j])) + scaled;
              ref_acc[i][j] = real_to_fp32(sum);
            end
          @(posedge clk);
          if (b == 0) t_start = $time;
          #1;
        end
        in_valid = 1'b0;
      end
      begin
        while (n_out < NBLK) begin
          @(posedge clk);
          if (out_valid) begin
            n_out++;
            t_out = $time;
          end
        end
      end
    join
    checks++;
    if ((t_out - t_start) / 10 != longint'(NBLK) + longint'(1)) begin
      failures++;
      $display("FAIL last result %0d cycles after first block, want %0d",
               (t_out - t_start) / 10, NBLK + 1);
    end

    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        checks++;
        if (d_out[i][j] !== ref_acc[i][j]) begin
          failures++;
          $display("FAIL D[%0d][%0d]: tensor core %h, reference %h", i, j, d_out[i][j], ref_acc[i][j]);
        end
        // Accuracy against the unquantised product (per-tensor scales
        // applied). Error is measured against sum |w_i * x_i|, since the
        // signed sum itself can cancel to almost nothing.
        exact = 0.0;
        mag   = 0.0;
        for (int k = 0; k < K; k++) begin
          exact += w[i][k] * x[j][k];
          mag   += (w[i][k] * x[j][k] < 0) ? -(w[i][k] * x[j][k]) : w[i][k] * x[j][k];
        end
        deq = fp32_to_real(d_out[i][j]) * ws32[i] * xs32[j];
        rel = (deq - exact) / mag;
        if (rel < 0) rel = -rel;
        $display("D[%0d][%0d]: exact %f, MixFP4 %f, error / sum|w*x| = %f", i, j, exact, deq, rel);
        checks++;
        if (rel > 0.02) begin
          failures++;
          $display("FAIL D[%0d][%0d]: dequantised result too far from exact", i, j);
        end
      end

    $display("blocks quantised as E2M1: %0d, as E1M2: %0d", n_e2m1, n_e1m2);
    checks++;
    if (n_e2m1 == 0 || n_e1m2 == 0) begin
      failures++;
      $display("FAIL only one format was ever chosen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
