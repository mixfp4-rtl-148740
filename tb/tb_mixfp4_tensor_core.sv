// tb_mixfp4_tensor_core -- end-to-end test of the 4x4 MixFP4 tensor core.
//
// Runs MixFP4 GEMM tiles D = A * B + C through the array at its default
// size (M = N = 4, 16-element blocks): 120 tiles with K from 1 to 16
// blocks. Every block of every A row and B column has its own random
// format bit, elements and E4M3 scale, so in one cycle different rows and
// columns use different formats. Blocks of one tile go back to back, with
// random idle cycles between some of them. C is random (zero or a moderate
// FP32 value) and loaded with the first block of each tile.
//
// The reference accumulates each D element in FP32 (round to nearest even)
// from exact block products computed in real arithmetic from the format
// definitions. Every output tile is compared bit for bit, and each result
// must appear two cycles after its block. A final 32-block tile with no
// gaps must finish in 32 + 2 cycles: 4 x 4 x 16 multiply-adds per cycle.
//
// Mechanisms counted (each must occur): A blocks in E2M1 and in E1M2,
// B blocks in E2M1 and in E1M2, cycles where the rows of A use both formats,
// mixed-format products, C loads, accumulation, back-to-back blocks, idle
// cycles.
module tb_mixfp4_tensor_core;
  import mixfp4_pkg::*;
  import mixfp4_ref_pkg::*;

  localparam int M = 4, N = 4, V = 16;

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
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef fp32_t tile_t [M][N];
  tile_t  exp_q[$];
  longint exp_cycle_q[$];
  tile_t  ref_d;

  int n_a_e2m1, n_a_e1m2, n_b_e2m1, n_b_e1m2, n_rows_mixed, n_mixed;
  int n_first, n_accum, n_b2b, n_idle;
  logic prev_valid;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      tile_t  w;
      longint wc;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output at cycle %0d", cycle);
      end else begin
        w  = exp_q[0];
        wc = exp_cycle_q[0];
        exp_q.delete(0);
        exp_cycle_q.delete(0);
        if (cycle != wc) begin
          failures++;
          $display("FAIL output at cycle %0d, want %0d", cycle, wc);
        end
        for (int i = 0; i < M; i++)
          for (int j = 0; j < N; j++)
            if (d_out[i][j] !== w[i][j]) begin
              failures++;
              $display("FAIL D[%0d][%0d] = %h, want %h", i, j, d_out[i][j], w[i][j]);
            end
      end
    end
    if (rst_n && in_valid && (ovf_flag || inexact_flag)) begin
      failures++;
      $display("FAIL aligner flag raised");
    end
  end

  function automatic logic [6:0] rand_scale();
    return 7'(8 + ($urandom % 112));
  endfunction

  function automatic fp32_t rand_c();
    if ($urandom % 2 == 0) return 32'h0;
    return {1'($urandom), 8'(110 + ($urandom % 40)), 23'($urandom)};
  endfunction

  task automatic send_block(input logic first);
    real  dot, sum;
    int   rows_t;
    for (int i = 0; i < M; i++) begin
      a_scale[i] = {1'($urandom), rand_scale()};
      for (int k = 0; k < V; k++) a_elems[i][k] = 4'($urandom);
      if (a_scale[i][7]) n_a_e1m2++; else n_a_e2m1++;
    end
    for (int j = 0; j < N; j++) begin
      b_scale[j] = {1'($urandom), rand_scale()};
      for (int k = 0; k < V; k++) b_elems[j][k] = 4'($urandom);
      if (b_scale[j][7]) n_b_e1m2++; else n_b_e2m1++;
    end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++)
        c_in[i][j] = rand_c();
    in_valid = 1'b1;
    in_first = first;

    rows_t = 0;
    for (int i = 0; i < M; i++) rows_t += int'(a_scale[i][7]);
    if (rows_t != 0 && rows_t != M) n_rows_mixed++;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        if (a_scale[i][7] != b_scale[j][7]) n_mixed++;
        dot = 0.0;
        for (int k = 0; k < V; k++)
          dot += fp4_value(a_elems[i][k], a_scale[i][7]) * fp4_value(b_elems[j][k], b_scale[j][7]);
        if (first) ref_d[i][j] = c_in[i][j];
        sum = fp32_to_real(ref_d[i][j])
            + dot * e4m3_value(a_scale[i][6:0]) * e4m3_value(b_scale[j][6:0]);
        ref_d[i][j] = real_to_fp32(sum);
      end
    exp_q.push_back(ref_d);
    exp_cycle_q.push_back(cycle + 2);
    if (first) n_first++; else n_accum++;
    if (prev_valid) n_b2b++;
    prev_valid = 1'b1;
    @(posedge clk);
    #1;
    in_valid = 1'b0;
  endtask

  task automatic idle(input int n);
    in_valid = 1'b0;
    for (int i = 0; i < n; i++) begin
      n_idle++;
      prev_valid = 1'b0;
      @(posedge clk);
      #1;
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
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
    prev_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int t = 0; t < 120; t++) begin
      int kb;
      kb = 1 + int'($urandom % 16);
      for (int b = 0; b < kb; b++) begin
        send_block(b == 0);
        if ($urandom % 5 == 0) idle(1 + int'($urandom % 2));
      end
    end
    idle(4);

    // Peak rate: 32 blocks back to back.
    t0 = cycle;
    for (int b = 0; b < 32; b++) send_block(b == 0);
    while (exp_q.size() != 0) @(posedge clk);
    checks++;
    if (cycle - t0 != 32 + 2) begin
      failures++;
      $display("FAIL 32 blocks took %0d cycles, want %0d", cycle - t0, 32 + 2);
    end
    idle(2);

    begin
      int    cnt [10];
      string nm  [10];
      cnt = '{n_a_e2m1, n_a_e1m2, n_b_e2m1, n_b_e1m2, n_rows_mixed, n_mixed,
              n_first, n_accum, n_b2b, n_idle};
      nm  = '{"A E2M1", "A E1M2", "B E2M1", "B E1M2", "rows mixed", "mixed product",
              "C load", "accumulate", "back-to-back", "idle"};
      for (int i = 0; i < 10; i++) begin
        $display("mechanism %-13s : %0d", nm[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", nm[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
