// tb_mixfp4_tc_slice -- end-to-end test of the MixFP4 tensor-core slice.
//
// Streams dot products of random length (1 to 12 blocks) through the slice
// at its default size (4 columns, 16 elements per block). Every block has
// random elements and random packed scales with random format bits, so
// E2M1 x E2M1, E1M2 x E1M2 and mixed blocks all occur. The first block of
// each dot product loads psum_in; the rest accumulate on the slice's own
// register. Blocks arrive back to back, with random idle cycles between
// some of them.
//
// The reference is computed independently from the format definitions:
// element values (E2M1, or E1M2 times 2) and E4M3 scale values in real
// arithmetic, the exact block dot product times both scales, and an FP32
// accumulation rounded to nearest even. Every result is compared bit for
// bit and must appear exactly two cycles after its block was accepted.
// A separate phase sends 64 blocks without a gap and checks that the last
// result arrives 64 + 2 cycles after the first block (one block, i.e. 16
// FP4 multiply-adds, per cycle).
//
// Each mechanism is counted and must occur: both format bits on both
// operands, mixed-format blocks, psum loads, accumulation on the internal
// register, back-to-back blocks, idle cycles, full-scale products (7 x 7
// in E1M2 and 6 x 6 in E2M1), negative results, result rounding, and a
// NaN block scale (the result stays NaN until the next dot product).
module tb_mixfp4_tc_slice;
  import mixfp4_pkg::*;
  import mixfp4_ref_pkg::*;

  localparam int V = 16;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          in_valid, in_first;
  fp4_t          a_elems [V];
  fp4_t          b_elems [V];
  scale_packed_t a_scale, b_scale;
  fp32_t         psum_in;
  logic          out_valid;
  fp32_t         acc_out;
  logic          ovf_flag, inexact_flag;

  mixfp4_tc_slice dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .a_elems(a_elems), .b_elems(b_elems), .a_scale(a_scale), .b_scale(b_scale),
    .psum_in(psum_in), .out_valid(out_valid), .acc_out(acc_out),
    .ovf_flag(ovf_flag), .inexact_flag(inexact_flag));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Scoreboard.
  fp32_t  exp_q[$];
  longint exp_cycle_q[$];
  fp32_t  ref_acc;

  // Mechanism counters.
  int n_a_e2m1, n_a_e1m2, n_b_e2m1, n_b_e1m2, n_mixed, n_first, n_accum;
  int n_b2b, n_idle, n_max_e1m2, n_max_e2m1, n_negative, n_rounded, n_nan;

  logic prev_valid;

  // Compare every result with the head of the scoreboard.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected result %h at cycle %0d", acc_out, cycle);
      end else begin
        fp32_t  w;
        longint wc;
        w  = exp_q.pop_front();
        wc = exp_cycle_q.pop_front();
        if (acc_out !== w || cycle != wc) begin
          failures++;
          $display("FAIL result %h at cycle %0d, want %h at cycle %0d", acc_out, cycle, w, wc);
        end
        if (acc_out[31]) n_negative++;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      checks++;
      if (ovf_flag || inexact_flag) begin
        failures++;
        $display("FAIL aligner flag raised");
      end
    end
  end

  function automatic logic [6:0] rand_scale();
    // E4M3 magnitudes from about 2^-6 to 2^8, never the NaN code.
    return 7'(8 + ($urandom % 112));
  endfunction

  // Drive one block (sets inputs before the edge, updates the reference).
  task automatic send_block(input logic first, input fp32_t psum,
                            input int force_mode, input logic force_nan = 1'b0);
    real dot, scaled, sum;
    logic ta, tb;
    ta = 1'($urandom); tb = 1'($urandom);
    if (force_mode == 1) begin ta = 1'b1; tb = 1'b1; end
    if (force_mode == 2) begin ta = 1'b0; tb = 1'b0; end
    a_scale = {ta, rand_scale()};
    b_scale = {tb, rand_scale()};
    if (force_nan) begin
      a_scale[6:0] = 7'h7f;   // the E4M3 NaN code
      n_nan++;
    end
    for (int k = 0; k < V; k++) begin
      a_elems[k] = 4'($urandom);
      b_elems[k] = 4'($urandom);
    end
    if (force_mode != 0) begin
      // one full-scale product at a random position
      int k;
      k = int'($urandom % V);
      a_elems[k] = {1'($urandom), 3'b111};
      b_elems[k] = {1'($urandom), 3'b111};
    end
    in_valid = 1'b1;
    in_first = first;
    psum_in  = psum;

    dot = 0.0;
    for (int k = 0; k < V; k++) begin
      dot += fp4_value(a_elems[k], ta) * fp4_value(b_elems[k], tb);
      if (ta && tb && a_elems[k][2:0] == 3'b111 && b_elems[k][2:0] == 3'b111) n_max_e1m2++;
      if (!ta && !tb && a_elems[k][2:0] == 3'b111 && b_elems[k][2:0] == 3'b111) n_max_e2m1++;
    end
    scaled = dot * e4m3_value(a_scale[6:0]) * e4m3_value(b_scale[6:0]);
    if (first) ref_acc = psum;
    if (force_nan || ref_acc == FP32_QNAN) begin
      ref_acc = FP32_QNAN;      // NaN in, NaN out until the next first block
    end else begin
      sum = fp32_to_real(ref_acc) + scaled;
      ref_acc = real_to_fp32(sum);
      if (fp32_to_real(ref_acc) != sum) n_rounded++;
    end
    exp_q.push_back(ref_acc);
    exp_cycle_q.push_back(cycle + 2);

    if (ta) n_a_e1m2++; else n_a_e2m1++;
    if (tb) n_b_e1m2++; else n_b_e2m1++;
    if (ta != tb) n_mixed++;
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

  function automatic fp32_t rand_psum();
    case ($urandom % 3)
      0: return 32'h0;
      1: return {1'($urandom), 8'(120 + ($urandom % 20)), 23'($urandom)};
      default: return {1'($urandom), 8'(100 + ($urandom % 60)), 23'($urandom)};
    endcase
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    rst_n = 1'b0; in_valid = 1'b0; in_first = 1'b0; psum_in = '0;
    a_scale = '0; b_scale = '0;
    for (int k = 0; k < V; k++) begin a_elems[k] = '0; b_elems[k] = '0; end
    prev_valid = 1'b0;
    ref_acc = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Random dot products.
    for (int op = 0; op < 300; op++) begin
      int k_blocks;
      k_blocks = 1 + int'($urandom % 12);
      for (int blk = 0; blk < k_blocks; blk++) begin
        send_block(blk == 0, rand_psum(), (op % 10 == 0) ? 1 : (op % 10 == 1) ? 2 : 0);
        if ($urandom % 4 == 0) idle(1 + int'($urandom % 3));
      end
    end
    idle(4);

    // A NaN block scale poisons its dot product; the next one recovers.
    send_block(1'b1, 32'h3f80_0000, 0);
    send_block(1'b0, 32'h0, 0, 1'b1);
    send_block(1'b0, 32'h0, 0);
    send_block(1'b1, 32'h0, 0);
    send_block(1'b0, 32'h0, 0);
    idle(4);

    // Throughput: 64 blocks back to back, one dot product.
    t0 = cycle;
    for (int blk = 0; blk < 64; blk++) send_block(blk == 0, 32'h0, 0);
    while (exp_q.size() != 0) @(posedge clk);
    checks++;
    if (cycle - t0 != 64 + 2) begin
      failures++;
      $display("FAIL 64 blocks took %0d cycles, want %0d", cycle - t0, 64 + 2);
    end
    idle(2);

    // Every mechanism must have happened.
    begin
      int cnt [13];
      string nm [13];
      cnt = '{n_a_e2m1, n_a_e1m2, n_b_e2m1, n_b_e1m2, n_mixed, n_first, n_accum,
              n_b2b, n_idle, n_max_e1m2 + 0, n_max_e2m1, n_negative, n_nan};
      nm  = '{"A E2M1", "A E1M2", "B E2M1", "B E1M2", "mixed", "psum load", "accumulate",
              "back-to-back", "idle", "E1M2 7x7", "E2M1 6x6", "negative", "NaN scale"};
      for (int i = 0; i < 13; i++) begin
        $display("mechanism %-12s : %0d", nm[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", nm[i]);
        end
      end
      $display("mechanism %-12s : %0d", "rounded", n_rounded);
      checks++;
      if (n_rounded == 0) begin
        failures++;
        $display("FAIL mechanism rounded never happened");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
