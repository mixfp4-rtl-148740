// block_scale_mul -- applies the two block scales to a block's partial dot.
//
// A block-scaled dot product factors as sum(a_i*sA * b_i*sB) =
// (sA*sB) * sum(a_i*b_i), so the slice adds unscaled products first and
// multiplies once per block by the product of the two scales. This module
// does that multiply. Each packed scale carries the MixFP4 type bit in bit 7;
// the numeric scale is rebuilt as the unsigned E4M3 value {1'b0, bits[6:0]}
// (bias 7, subnormal at e = 0), so the type bit never reaches the
// arithmetic. The two 4-bit significands are multiplied (8 bits), the
// partial dot (PW-bit signed integer in units of 2^-4) is multiplied by that
// (PW+8 <= 24 bits) and the result is normalised into an IEEE single. Since
// it has at most 24 significant bits, the conversion is exact: no rounding
// happens here. The E4M3 NaN code (magnitude bits 1111.111) on either scale
// gives a quiet NaN. Bit 7 of each scale input is unused on purpose: it is
// the format bit, consumed by the element decoders, not part of the scale.
//
// Interface: partial (signed PW), scale_a, scale_b (scale_packed_t) in;
// y (fp32_t) out. Combinational.
//
// The type-in-scale packing, the unsigned E4M3 scale and the single
// per-block scale multiply follow the paper. Building the scale product
// into an exact FP32 value is this design's choice; the paper does not give
// the width of this multiplier.
module block_scale_mul
  import mixfp4_pkg::*;
#(
  parameter int unsigned PW = 16
) (
  input  logic signed [PW-1:0] partial,
  input  scale_packed_t        scale_a,
  input  scale_packed_t        scale_b,
  output fp32_t                y
);

  localparam int unsigned PROD_W = PW + 8;

  if (PROD_W > 24) begin : g_check
    $error("block_scale_mul: PW must be at most 16 for an exact FP32 result");
  end

  logic [7:0]        ue4m3_a, ue4m3_b;  // unsigned scales, type bit cleared
  logic [3:0]        siga, sigb;
  logic [4:0]        exp_sum;           // eeA + eeB, 2..30
  logic [7:0]        sig_prod;
  logic [PW-1:0]     pmag;
  logic [PROD_W-1:0] prod;
  logic [4:0]        lead;
  logic [23:0]       norm;
  logic              nan;

  always_comb begin
    ue4m3_a  = {1'b0, scale_a.e, scale_a.m};
    ue4m3_b  = {1'b0, scale_b.e, scale_b.m};
    siga     = {(ue4m3_a[6:3] != 4'd0), ue4m3_a[2:0]};
    sigb     = {(ue4m3_b[6:3] != 4'd0), ue4m3_b[2:0]};
    exp_sum  = 5'((ue4m3_a[6:3] == 4'd0) ? 4'd1 : ue4m3_a[6:3])
             + 5'((ue4m3_b[6:3] == 4'd0) ? 4'd1 : ue4m3_b[6:3]);
    sig_prod = 8'(siga) * 8'(sigb);
    nan      = (ue4m3_a[6:0] == 7'h7f) || (ue4m3_b[6:0] == 7'h7f);
    pmag     = partial[PW-1] ? PW'(-partial) : PW'(partial);
    prod     = PROD_W'(pmag) * PROD_W'(sig_prod);

    // Leading-one position.
    lead = '0;
    for (int i = 0; i < int'(PROD_W); i++) begin
      if (prod[i]) lead = 5'(i);
    end
    norm = 24'(prod) << (5'd23 - lead);

    // value = prod * 2^(exp_sum - 20) * 2^-4; biased FP32 exponent below.
    if (nan) begin
      y = FP32_QNAN;
    end else if (prod == '0) begin
      y = '0;
    end else begin
      y = {partial[PW-1],
           8'(8'd127 + 8'(lead) + 8'(exp_sum) - 8'd24),
           norm[22:0]};
    end
  end

endmodule
