// mixfp4_tensor_core -- M x N array of MixFP4 slices: a 4x4x16 FP4 MMA per cycle.
//
// The tensor core computes D = A * B + C for an M x K tile of A and a K x N
// tile of B, both stored as MixFP4 (16-element blocks along K, one packed
// E4M3 scale with the format bit per block). Each cycle it takes one block
// column of A (M rows x 16 elements, M packed scales) and one block row of
// B (N columns x 16 elements, N packed scales) and performs M x N x 16
// multiply-adds: with the default M = N = 4 that is the 4x4x16 FP4 MMA per
// cycle of the modelled tensor core.
//
// It is an array of M x N mixfp4_tc_slice instances, one per output
// element: slice (i, j) gets row i of A with A's scale for row i, and
// column j of B with B's scale for column j, and accumulates D[i][j] in FP32.
// All slices share in_valid and in_first, so they run in lockstep; c_in is
// the starting C tile, loaded with the first block of a K loop.
//
// Interface and timing: as mixfp4_tc_slice, with the operands as arrays.
// A block pair may be given every cycle; out_valid and the whole D tile
// follow two clock edges later. rst_n is synchronous, active low.
// ovf_flag/inexact_flag are the OR of all slices' flags.
//
// From the paper: the array view of the tensor core and the 4x4x16 FP4 MMA
// rate, with a single output lane analysed in detail. This design's
// choices: one complete slice per output element (each slice decodes its
// own copy of the operands; a shared decode per row and per column would
// save decoders), the operand layout, and the common accumulation control.
module mixfp4_tensor_core
  import mixfp4_pkg::*;
#(
  parameter int unsigned M    = 4,            // rows of the output tile
  parameter int unsigned N    = 4,            // columns of the output tile
  parameter int unsigned COLS = BLOCK_V / 4   // slice columns (block = 4*COLS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_first,
  input  fp4_t          a_elems [M][4*COLS],
  input  scale_packed_t a_scale [M],
  input  fp4_t          b_elems [N][4*COLS],
  input  scale_packed_t b_scale [N],
  input  fp32_t         c_in    [M][N],
  output logic          out_valid,
  output fp32_t         d_out   [M][N],
  output logic          ovf_flag,
  output logic          inexact_flag
);

  logic [M*N-1:0] valid_v, ovf_v, inexact_v;

  for (genvar i = 0; i < int'(M); i++) begin : g_row
    for (genvar j = 0; j < int'(N); j++) begin : g_col
      mixfp4_tc_slice #(.COLS(COLS)) u_slice (
        .clk          (clk),
        .rst_n        (rst_n),
        .in_valid     (in_valid),
        .in_first     (in_first),
        .a_elems      (a_elems[i]),
        .b_elems      (b_elems[j]),
        .a_scale      (a_scale[i]),
        .b_scale      (b_scale[j]),
        .psum_in      (c_in[i][j]),
        .out_valid    (valid_v[i*N+j]),
        .acc_out      (d_out[i][j]),
        .ovf_flag     (ovf_v[i*N+j]),
        .inexact_flag (inexact_v[i*N+j]));
    end
  end

  // All slices are in lockstep; slice (0,0) speaks for the array.
  assign out_valid    = valid_v[0];
  assign ovf_flag     = |ovf_v;
  assign inexact_flag = |inexact_v;

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    valid_v == {(M*N){valid_v[0]}})
    else $error("mixfp4_tensor_core: slices out of step");

endmodule
