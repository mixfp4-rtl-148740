// mixfp4_tc_slice -- one output lane of a MixFP4-enabled FP4 tensor core.
//
// The slice computes one element of a block-scaled FP4 matrix product
// (M = N = 1, a K-long dot product) at the FP4 rate of 16 multiply-adds per
// cycle, i.e. one 16-element MixFP4 block of A and one of B per cycle, and
// accumulates the block results in FP32.
//
// Datapath, per block (stage 1, then stage 2):
//   1. Type-in-scale: bit 7 of each packed E4M3 block scale is the block's
//      format bit T (0 = E2M1, 1 = E1M2). It drives the 16 element decoders
//      of that operand (32 mixfp4_decoder instances), which produce E2M2.
//   2. Sixteen multipliers arranged as 4 columns of {E2M2, E2M2, FP8, BF16}:
//      elements 4c and 4c+1 go to the two E2M2 multipliers of column c,
//      element 4c+2 to its E5M3 (FP8) multiplier and 4c+3 to its E8M10
//      (BF16) multiplier; the wider lanes get the E2M2 operands re-encoded
//      by e2m2_widen. Every product is exact (fp_mul).
//   3. Each product is aligned to a 12-bit signed fixed-point grid
//      (prod_align, LSB 2^-4) and the column adders and adder tree
//      (dot_adder_tree) form the exact unscaled block dot product, 16 bits.
//      --- pipeline register ---
//   4. The partial dot is multiplied once by the product of the two
//      unsigned E4M3 block scales (block_scale_mul, exact FP32 result)...
//   5. ...and added to the partial sum in FP32 (fp32_add, round to nearest
//      even). The partial sum is psum_in for a block marked first, else the
//      slice's own accumulator, so a K-long dot product streams one block
//      per cycle. --- accumulator register (acc_out) ---
// The per-tensor FP32 scale of NVFP4/MixFP4 is not applied here; it is a
// single multiply of the finished result, outside the slice.
//
// Interface and timing: when in_valid is high at a rising clock edge the
// slice takes a_elems/b_elems (16 x 4 bits each), a_scale/b_scale (packed
// scales), in_first and psum_in. Two edges later out_valid is high for one
// cycle and acc_out holds psum + scaled block dot. A new block may be given
// every cycle; there is no back-pressure. rst_n is an active-low
// synchronous reset that clears the valid bits and the accumulator.
// ovf_flag/inexact_flag report an aligner saturation or truncation in stage
// 1 (impossible for legal FP4 inputs; asserted against).
//
// Follows the paper: the block of 16, the packed scale with T in its sign
// bit, the decoder, E2M2 multipliers in the FP4 lanes, the 4-column
// structure with column adders, a 2-level tree, one block-scale multiply and
// a PSUM adder, and FP32 accumulation. This design's choices: the mapping
// of elements to lanes, the widening of E2M2 operands for the FP8/BF16
// lanes, exact fixed-point addition inside a block, the two pipeline
// stages, the in_first/psum_in accumulation control and the reset.
// The slice's BF16 and FP8 operating modes (4 and 8 products per cycle)
// are not modelled; only the FP4 (MixFP4) mode is.
module mixfp4_tc_slice
  import mixfp4_pkg::*;
#(
  parameter int unsigned COLS = BLOCK_V / 4   // columns of the slice (4 in the paper)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_first,
  input  fp4_t          a_elems [4*COLS],
  input  fp4_t          b_elems [4*COLS],
  input  scale_packed_t a_scale,
  input  scale_packed_t b_scale,
  input  fp32_t         psum_in,
  output logic          out_valid,
  output fp32_t         acc_out,
  output logic          ovf_flag,
  output logic          inexact_flag
);

  localparam int unsigned V      = 4 * COLS;
  localparam int unsigned AW     = E2M2_ALIGN_W;
  localparam int unsigned PW     = AW + 2 + $clog2(COLS);

  // ---------------------------------------------------------------- stage 1
  e2m2_t             a_dec [V];
  e2m2_t             b_dec [V];
  logic signed [AW-1:0] prod_q [COLS][4];
  logic [V-1:0]      lane_ovf, lane_inexact;
  logic signed [PW-1:0] partial;

  for (genvar k = 0; k < int'(V); k++) begin : g_dec
    mixfp4_decoder u_dec_a (.din(a_elems[k]), .t(a_scale.t), .dout(a_dec[k]));
    mixfp4_decoder u_dec_b (.din(b_elems[k]), .t(b_scale.t), .dout(b_dec[k]));
  end

  for (genvar c = 0; c < int'(COLS); c++) begin : g_col
    // Two E2M2 lanes.
    for (genvar j = 0; j < 2; j++) begin : g_e2m2
      logic       ps;
      logic [2:0] pe;
      logic [5:0] pm;
      fp_mul #(.EW(2), .MW(2)) u_mul (
        .a(a_dec[4*c+j]), .b(b_dec[4*c+j]),
        .p_sign(ps), .p_exp(pe), .p_sig(pm));
      prod_align #(.EW(2), .MW(2), .BIAS(1), .OUT_W(AW), .LSB_EXP(LSB_EXP)) u_al (
        .p_sign(ps), .p_exp(pe), .p_sig(pm), .q(prod_q[c][j]),
        .ovf(lane_ovf[4*c+j]), .inexact(lane_inexact[4*c+j]));
    end

    // FP8 lane (E5M3 multiplier, bias 15).
    begin : g_fp8
      logic [8:0] wa, wb;
      logic       ps;
      logic [5:0] pe;
      logic [7:0] pm;
      e2m2_widen #(.EW(5), .MW(3), .BIAS(15)) u_wa (.x(a_dec[4*c+2]), .y(wa));
      e2m2_widen #(.EW(5), .MW(3), .BIAS(15)) u_wb (.x(b_dec[4*c+2]), .y(wb));
      fp_mul #(.EW(5), .MW(3)) u_mul (
        .a(wa), .b(wb), .p_sign(ps), .p_exp(pe), .p_sig(pm));
      prod_align #(.EW(5), .MW(3), .BIAS(15), .OUT_W(AW), .LSB_EXP(LSB_EXP)) u_al (
        .p_sign(ps), .p_exp(pe), .p_sig(pm), .q(prod_q[c][2]),
        .ovf(lane_ovf[4*c+2]), .inexact(lane_inexact[4*c+2]));
    end

    // BF16 lane (E8M10 multiplier, bias 127).
    begin : g_bf16
      logic [18:0] wa, wb;
      logic        ps;
      logic [8:0]  pe;
      logic [21:0] pm;
      e2m2_widen #(.EW(8), .MW(10), .BIAS(127)) u_wa (.x(a_dec[4*c+3]), .y(wa));
      e2m2_widen #(.EW(8), .MW(10), .BIAS(127)) u_wb (.x(b_dec[4*c+3]), .y(wb));
      fp_mul #(.EW(8), .MW(10)) u_mul (
        .a(wa), .b(wb), .p_sign(ps), .p_exp(pe), .p_sig(pm));
      prod_align #(.EW(8), .MW(10), .BIAS(127), .OUT_W(AW), .LSB_EXP(LSB_EXP)) u_al (
        .p_sign(ps), .p_exp(pe), .p_sig(pm), .q(prod_q[c][3]),
        .ovf(lane_ovf[4*c+3]), .inexact(lane_inexact[4*c+3]));
    end
  end

  dot_adder_tree #(.COLS(COLS), .IN_W(AW), .OUT_W(PW)) u_tree (
    .prod(prod_q), .sum(partial));

  // Stage-1 pipeline register.
  logic                 s1_valid, s1_first;
  logic signed [PW-1:0] s1_partial;
  scale_packed_t        s1_sa, s1_sb;
  fp32_t                s1_psum;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_first   <= in_first;
      s1_partial <= partial;
      s1_sa      <= a_scale;
      s1_sb      <= b_scale;
      s1_psum    <= psum_in;
    end
  end

  // ---------------------------------------------------------------- stage 2
  fp32_t scaled, acc_src, acc_next, acc_q;
  logic  out_valid_q;

  block_scale_mul #(.PW(PW)) u_scale (
    .partial(s1_partial), .scale_a(s1_sa), .scale_b(s1_sb), .y(scaled));

  assign acc_src = s1_first ? s1_psum : acc_q;

  fp32_add u_psum_add (.a(acc_src), .b(scaled), .y(acc_next));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid_q <= 1'b0;
      acc_q       <= '0;
    end else begin
      out_valid_q <= s1_valid;
      if (s1_valid) acc_q <= acc_next;
    end
  end

  assign out_valid    = out_valid_q;
  assign acc_out      = acc_q;
  assign ovf_flag     = in_valid && (lane_ovf != '0);
  assign inexact_flag = in_valid && (lane_inexact != '0);

  // Legal FP4 operands never leave the 12-bit product grid.
  a_no_ovf: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (lane_ovf == '0 && lane_inexact == '0))
    else $error("mixfp4_tc_slice: product left the fixed-point grid");

endmodule
