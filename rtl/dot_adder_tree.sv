// dot_adder_tree -- adds the 16 aligned products of one block.
//
// The slice is drawn as COLS = 4 columns. Each column stacks two E2M2
// multipliers, one FP8 multiplier and one BF16 multiplier with an adder
// between neighbours, so each column adds its four products in a chain:
//     s1 = p[c][0] + p[c][1]   (the adder between the two E2M2 lanes, the
//                               one MixFP4 widens from E4M3 to E4M5)
//     s2 = s1 + p[c][2]        (adds the FP8-lane product)
//     s3 = s2 + p[c][3]        (adds the BF16-lane product)
// The column sums then go through a binary tree of adders (two adders, then
// one, for four columns) to give the block's unscaled partial dot product.
//
// All operands are fixed point on one grid (see prod_align), so the adders
// are integer adders, each one bit wider than its inputs: no rounding and no
// overflow. Interface: prod[COLS][4] signed IN_W-bit in, sum signed OUT_W-bit
// out. Combinational.
//
// The column/tree arrangement and the four columns follow the paper's tensor
// core figure; the order in which a column's adders take the products is
// read from the drawing top to bottom. Exact integer addition is this
// design's choice (the paper's cost model sizes the adders as n-bit integer
// adders, n = 12 for E2M2).
module dot_adder_tree #(
  parameter int unsigned COLS  = 4,
  parameter int unsigned IN_W  = 12,
  parameter int unsigned OUT_W = IN_W + 2 + $clog2(COLS)
) (
  input  logic signed [IN_W-1:0]  prod [COLS][4],
  output logic signed [OUT_W-1:0] sum
);

  // Heap-ordered tree nodes: node[COLS+c] is column c, node[1] the root.
  logic signed [OUT_W-1:0] node [1:2*COLS-1];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic signed [IN_W:0]   s1;
    logic signed [IN_W+1:0] s2, s3;
    assign s1 = (IN_W+1)'(prod[c][0]) + (IN_W+1)'(prod[c][1]);
    assign s2 = (IN_W+2)'(s1) + (IN_W+2)'(prod[c][2]);
    assign s3 = s2 + (IN_W+2)'(prod[c][3]);
    assign node[COLS+c] = OUT_W'(s3);
  end

  for (genvar i = COLS-1; i >= 1; i--) begin : g_tree
    assign node[i] = node[2*i] + node[2*i+1];
  end

  assign sum = node[1];

endmodule
