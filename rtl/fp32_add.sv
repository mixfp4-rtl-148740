// fp32_add -- IEEE-754 single-precision adder for the partial sum.
//
// The last step of the slice adds the scaled block result to the running
// partial sum (PSUM) in FP32. The adder swaps its operands so that the
// larger magnitude comes first, shifts the smaller significand right by the
// exponent difference while keeping guard, round and sticky bits, adds or
// subtracts, renormalises (right by one after a carry, left by the leading
// zero count after cancellation, never below the smallest exponent, so
// subnormal results come out as subnormals) and rounds to nearest, ties to
// even. Subnormal inputs are handled; overflow gives infinity; a NaN input
// or inf - inf gives the quiet NaN 0x7fc00000; an exact zero sum is +0
// unless both inputs are -0.
//
// Interface: a, b (fp32_t) in, y (fp32_t) out. Combinational.
//
// The paper says only that FP32 accumulation is kept unchanged from the
// baseline tensor core; the adder's structure and its rounding mode are
// this design's choice.
module fp32_add
  import mixfp4_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sx, sy;
  logic [7:0]  ea, eb;
  logic [23:0] siga, sigb, sigx, sigy;
  logic [7:0]  eea, eeb, eex, eey;
  logic        nan_a, nan_b, inf_a, inf_b;
  logic [7:0]  d;
  logic [26:0] mx, my, my_s;
  logic [27:0] sum;
  logic [9:0]  ex;           // working exponent, may exceed 254 before the check
  logic [4:0]  lz;
  logic [9:0]  lsh;
  logic [23:0] mant;
  logic        guard, rs, inc;
  logic [24:0] mr;

  always_comb begin
    sa = a[31];  ea = a[30:23];
    sb = b[31];  eb = b[30:23];
    nan_a = (ea == 8'hff) && (a[22:0] != '0);
    nan_b = (eb == 8'hff) && (b[22:0] != '0);
    inf_a = (ea == 8'hff) && (a[22:0] == '0);
    inf_b = (eb == 8'hff) && (b[22:0] == '0);
    siga  = {(ea != 8'd0), a[22:0]};
    sigb  = {(eb != 8'd0), b[22:0]};
    eea   = (ea == 8'd0) ? 8'd1 : ea;
    eeb   = (eb == 8'd0) ? 8'd1 : eb;

    // Larger magnitude first.
    if ({eea, siga} >= {eeb, sigb}) begin
      sx = sa; eex = eea; sigx = siga;
      sy = sb; eey = eeb; sigy = sigb;
    end else begin
      sx = sb; eex = eeb; sigx = sigb;
      sy = sa; eey = eea; sigy = siga;
    end

    // Align with guard, round and sticky bits.
    d  = eex - eey;
    mx = {sigx, 3'b000};
    my = {sigy, 3'b000};
    if (d >= 8'd27) begin
      my_s = {26'd0, (sigy != '0)};
    end else begin
      my_s = (my >> d) | 27'((my & ~({27{1'b1}} << d)) != '0);
    end

    if (sx ^ sy) sum = {1'b0, mx} - {1'b0, my_s};
    else         sum = {1'b0, mx} + {1'b0, my_s};
    ex = {2'b00, eex};

    // Normalise.
    lz  = '0;
    lsh = '0;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      ex  = ex + 10'd1;
    end else begin
      for (int i = 0; i <= 26; i++) begin
        if (sum[i]) lz = 5'(26 - i);
      end
      if (sum[26:0] == '0) lz = 5'd0;
      lsh = (10'(lz) < ex - 10'd1) ? 10'(lz) : ex - 10'd1;
      sum = sum << lsh;
      ex  = ex - lsh;
    end

    // Round to nearest, ties to even.
    mant  = sum[26:3];
    guard = sum[2];
    rs    = sum[1] | sum[0];
    inc   = guard & (rs | mant[0]);
    mr    = {1'b0, mant} + 25'(inc);
    if (mr[24]) begin
      mr = mr >> 1;
      ex = ex + 10'd1;
    end

    if (nan_a || nan_b || (inf_a && inf_b && (sa != sb))) begin
      y = FP32_QNAN;
    end else if (inf_a) begin
      y = a;
    end else if (inf_b) begin
      y = b;
    end else if (mr == '0) begin
      y = {sa & sb, 31'd0};
    end else if (ex >= 10'd255) begin
      y = {sx, 8'hff, 23'd0};
    end else begin
      y = {sx, (mr[23] ? ex[7:0] : 8'd0), mr[22:0]};
    end
  end

endmodule
