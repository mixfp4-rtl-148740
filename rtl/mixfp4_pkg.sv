// mixfp4_pkg -- shared types and constants of the MixFP4 tensor-core slice.
//
// MixFP4 is NVFP4 (16-element blocks of 4-bit values, one FP8 E4M3 scale per
// block) in which every block may store its values either as E2M1 (the NVFP4
// codebook 0..6) or as E1M2 (a uniform, INT4-like codebook). The choice is a
// single bit T per block, kept in the otherwise unused sign bit of the E4M3
// block scale: scale_packed[7] = T, scale_packed[6:0] = unsigned E4M3 scale.
// Inside the slice both element formats are decoded to one 5-bit internal
// format, sign + E2M2 (exponent bias 1, subnormals at e = 0).
//
// The block size of 16, the E4M3 scale, the type-in-scale packing and the
// E2M2 internal format follow the paper. The field order of the structs is
// this design's choice (MSB first, as drawn in the paper's bit diagrams).
package mixfp4_pkg;

  // Elements per block (the paper's V = 16).
  localparam int unsigned BLOCK_V = 16;

  // Width of the fixed-point grid the FP4-mode products are aligned to:
  // n = 2^(x+1) + 2y with x = y = 2 for E2M2 (paper's aligner-width formula).
  localparam int unsigned E2M2_ALIGN_W = 12;
  // Weight of the LSB of that grid: the smallest non-zero E2M2 product is
  // 0.25 * 0.25 = 2^-4.
  localparam int LSB_EXP = -4;

  // One stored FP4 element: sign and 3-bit payload [p2 p1 p0].
  typedef logic [3:0] fp4_t;

  // Internal E2M2 value: sign, 2-bit exponent (bias 1), 2-bit mantissa.
  typedef struct packed {
    logic       s;
    logic [1:0] e;
    logic [1:0] m;
  } e2m2_t;

  // Packed block scale: format type bit in the sign position of E4M3.
  typedef enum logic {
    FMT_E2M1 = 1'b0,   // T = 0: NVFP4 payload
    FMT_E1M2 = 1'b1    // T = 1: INT-like payload
  } fp4_fmt_e;

  typedef struct packed {
    fp4_fmt_e   t;     // block-shared format type
    logic [3:0] e;     // E4M3 exponent, bias 7
    logic [2:0] m;     // E4M3 mantissa
  } scale_packed_t;

  // IEEE-754 single precision, used for the partial sum.
  typedef logic [31:0] fp32_t;
  localparam fp32_t FP32_QNAN = 32'h7fc0_0000;

endpackage
