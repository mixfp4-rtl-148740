// e2m2_widen -- re-encode an internal E2M2 value in a wider float format.
//
// In the FP4 mode the slice computes all 16 products of a block in one
// cycle, so the FP8 (E5M3) and BF16 (E8M10) multipliers also receive decoded
// E2M2 operands. This helper writes the same value with EW exponent bits,
// exponent bias BIAS and MW mantissa bits. Normal E2M2 values (e >= 1) are
// rebiased and their two mantissa bits padded with zeros; the three E2M2
// subnormals 0.25, 0.5 and 0.75 become normal numbers of the wider format.
// The conversion is exact. Requires MW >= 2 and BIAS >= 2.
//
// Interface: x (e2m2_t) in, y = {sign, exponent[EW], mantissa[MW]} out.
// Combinational. The widening step is this design's choice: the paper says
// only that the FP8 and BF16 multipliers are reused for FP4 throughput.
module e2m2_widen
  import mixfp4_pkg::*;
#(
  parameter int unsigned EW   = 5,
  parameter int unsigned MW   = 3,
  parameter int unsigned BIAS = 15
) (
  input  e2m2_t          x,
  output logic [EW+MW:0] y
);

  logic [EW-1:0] ey;
  logic [MW-1:0] my;

  always_comb begin
    ey = '0;
    my = '0;
    if (x.e != 2'd0) begin
      // 2^(e-1) * (1 + m/4)
      ey = EW'(BIAS) + EW'(x.e) - EW'(1);
      my = {x.m, {(MW-2){1'b0}}};
    end else begin
      unique case (x.m)
        2'd0: begin ey = '0;                    my = '0; end  // 0
        2'd1: begin ey = EW'(BIAS) - EW'(2);    my = '0; end  // 0.25
        2'd2: begin ey = EW'(BIAS) - EW'(1);    my = '0; end  // 0.5
        2'd3: begin ey = EW'(BIAS) - EW'(1);    my = {1'b1, {(MW-1){1'b0}}}; end  // 0.75
        default: begin ey = '0; my = '0; end
      endcase
    end
  end

  assign y = {x.s, ey, my};

endmodule
