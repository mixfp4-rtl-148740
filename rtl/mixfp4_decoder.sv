// mixfp4_decoder -- MixFP4 element decoder (one per FP4 operand element).
//
// Turns a stored 4-bit element into the 5-bit internal E2M2 format. The block
// type bit T, taken from the sign bit of the block's E4M3 scale, selects one
// of two paths into a 2:1 multiplexer:
//   T = 0 (E2M1 path): the 4-bit element is shifted left by one, i.e. the
//     E2M1 fields are kept and a 0 is appended as the second mantissa bit.
//     The E2M2 value equals the E2M1 value (0, 0.5, 1, 1.5, 2, 3, 4, 6).
//   T = 1 (E1M2 path): a fixed 8-entry lookup table maps the 3-bit payload
//     c to the E2M2 code of the integer c (0..7). This is the E1M2 value
//     (c/2) times the fixed factor 2 that makes E1M2 an exact INT4 lattice;
//     the factor is part of the value convention, so nothing downstream
//     corrects for it.
// The sign bit passes through on both paths.
//
// Interface: din (fp4_t), t (block type), dout (e2m2_t). Purely
// combinational, no clock.
//
// From the paper: the two paths, the shift-by-one E2M1 path, the 4-bit input
// and 5-bit output widths and the entries printed for payloads 100..111 in
// both modes. The table entries for payloads 000..011 of the E1M2 path are
// derived here from the same rule (E2M2 code of the integer c).
module mixfp4_decoder
  import mixfp4_pkg::*;
(
  input  fp4_t     din,
  input  fp4_fmt_e t,
  output e2m2_t    dout
);

  e2m2_t e2m1_path;
  e2m2_t e1m2_path;

  // E2M1 path: << 1 (append a trailing zero mantissa bit).
  assign e2m1_path = {din, 1'b0};

  // E1M2 path: lookup of the integer c = payload into E2M2 (bias 1).
  always_comb begin
    e1m2_path.s = din[3];
    unique case (din[2:0])
      3'd0: {e1m2_path.e, e1m2_path.m} = 4'b00_00;  // 0
      3'd1: {e1m2_path.e, e1m2_path.m} = 4'b01_00;  // 1
      3'd2: {e1m2_path.e, e1m2_path.m} = 4'b10_00;  // 2
      3'd3: {e1m2_path.e, e1m2_path.m} = 4'b10_10;  // 3
      3'd4: {e1m2_path.e, e1m2_path.m} = 4'b11_00;  // 4
      3'd5: {e1m2_path.e, e1m2_path.m} = 4'b11_01;  // 5
      3'd6: {e1m2_path.e, e1m2_path.m} = 4'b11_10;  // 6
      3'd7: {e1m2_path.e, e1m2_path.m} = 4'b11_11;  // 7
      default: {e1m2_path.e, e1m2_path.m} = 4'b00_00;
    endcase
  end

  // Output multiplexer controlled by the block type bit.
  assign dout = (t == FMT_E1M2) ? e1m2_path : e2m1_path;

endmodule
