// prod_align -- aligner: product to signed fixed point on a common grid.
//
// Takes an exact product from fp_mul (sign, effective exponent sum p_exp,
// significand p_sig) and shifts it with a barrel shifter onto a signed
// fixed-point grid whose least significant bit weighs 2^LSB_EXP, so that
// the adder tree can add products of all lanes with plain integer adders.
// The shift amount is p_exp - 2*BIAS - 2*MW - LSB_EXP. A left shift that
// does not fit in OUT_W bits saturates and raises ovf; a right shift drops
// bits (truncation toward zero) and raises inexact. In the FP4 mode neither
// happens: E2M2 products need shifts of 0..4 and at most 10 magnitude bits.
//
// Interface: p_sign, p_exp, p_sig in; q (signed, OUT_W bits), ovf, inexact
// out. Combinational.
//
// The paper's cost model has a barrel aligner per lane of width
// n = min(2^(x+1) + 2y, psum width), 12 bits for E2M2; OUT_W defaults to
// that. Saturation and truncation for out-of-range products are this
// design's choice.
module prod_align #(
  parameter int unsigned EW      = 2,
  parameter int unsigned MW      = 2,
  parameter int unsigned BIAS    = 1,
  parameter int unsigned OUT_W   = 12,
  parameter int          LSB_EXP = -4
) (
  input  logic                    p_sign,
  input  logic [EW:0]             p_exp,
  input  logic [2*MW+1:0]         p_sig,
  output logic signed [OUT_W-1:0] q,
  output logic                    ovf,
  output logic                    inexact
);

  localparam int unsigned SW   = 2*MW + 2;
  localparam int unsigned WIDE = OUT_W + SW;

  int                 sh;
  logic [WIDE-1:0]    wide;
  logic [OUT_W-2:0]   mag;
  logic [SW-1:0]      lost;

  always_comb begin
    sh      = int'(p_exp) - 2*int'(BIAS) - 2*int'(MW) - LSB_EXP;
    wide    = '0;
    mag     = '0;
    lost    = '0;
    ovf     = 1'b0;
    inexact = 1'b0;
    if (sh >= 0) begin
      if (sh >= int'(OUT_W)) begin
        ovf = (p_sig != '0);
      end else begin
        wide = WIDE'(p_sig) << sh;
        ovf  = (wide[WIDE-1:OUT_W-1] != '0);
        mag  = wide[OUT_W-2:0];
      end
    end else begin
      if (-sh >= int'(SW)) begin
        inexact = (p_sig != '0);
      end else begin
        wide    = WIDE'(p_sig >> (-sh));
        lost    = p_sig & ~({SW{1'b1}} << (-sh));
        inexact = (lost != '0);
        mag     = wide[OUT_W-2:0];
      end
    end
    if (ovf) mag = '1;
    q = p_sign ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end

endmodule
