// fp_mul -- exact floating-point multiplier for one lane of the slice.
//
// The slice has three kinds of multipliers: eight E2M2 multipliers (the FP4
// lanes that MixFP4 widens from E2M1), four E5M3 multipliers (the FP8 lanes)
// and four E8M10 multipliers (the BF16/FP16 lanes). This module is all three,
// chosen by the exponent width EW and mantissa width MW. It does not round:
// the significands, including the hidden bit (1 for e != 0, 0 for
// subnormals), are multiplied in full and the effective exponents are added,
// so the product is exactly
//     (-1)^p_sign * p_sig * 2^(p_exp - 2*BIAS - 2*MW)
// where BIAS is the format's exponent bias, applied later by prod_align.
// Infinities and NaNs are not decoded (the FP4 formats have none, and in the
// FP4 mode modelled here the wider lanes only see widened E2M2 values); an
// all-ones exponent is treated as an ordinary number.
//
// Interface: a, b = {sign, exponent[EW], mantissa[MW]}; outputs p_sign,
// p_exp (EW+1 bits), p_sig (2*MW+2 bits). Combinational.
//
// The three multiplier formats come from the paper's multiplier composition
// (4 x E8M10 + 4 x E5M3 + 8 x E2M2). That the product is kept exact and
// unnormalised is this design's choice; it is what makes the fixed-point
// alignment width n = 2^(x+1) + 2y of the paper's cost model exact.
module fp_mul #(
  parameter int unsigned EW = 2,   // exponent bits (E2M2 lane by default)
  parameter int unsigned MW = 2    // mantissa bits
) (
  input  logic [EW+MW:0]   a,
  input  logic [EW+MW:0]   b,
  output logic             p_sign,
  output logic [EW:0]      p_exp,
  output logic [2*MW+1:0]  p_sig
);

  logic [EW-1:0] ea, eb;
  logic [MW-1:0] ma, mb;
  logic [MW:0]   siga, sigb;
  logic [EW-1:0] eea, eeb;

  assign ea = a[EW+MW-1:MW];
  assign eb = b[EW+MW-1:MW];
  assign ma = a[MW-1:0];
  assign mb = b[MW-1:0];

  // Hidden bit and effective exponent (subnormals use exponent 1).
  assign siga = {(ea != '0), ma};
  assign sigb = {(eb != '0), mb};
  assign eea  = (ea == '0) ? EW'(1) : ea;
  assign eeb  = (eb == '0) ? EW'(1) : eb;

  assign p_sign = a[EW+MW] ^ b[EW+MW];
  assign p_exp  = {1'b0, eea} + {1'b0, eeb};
  assign p_sig  = (2*MW+2)'(siga) * (2*MW+2)'(sigb);

endmodule
