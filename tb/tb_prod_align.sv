// tb_prod_align -- checks the product aligner.
//
// E2M2 configuration (12-bit grid, LSB 2^-4): every exponent/significand
// pair, including shifts that overflow. E5M3 configuration: random
// products, including right shifts that lose bits. The expected grid value
// is computed in real arithmetic: trunc(|v| / 2^-4) with sign, saturated at
// 2^11 - 1, with the ovf and inexact flags.
module tb_prod_align;
  int checks = 0, failures = 0;

  logic        s2;  logic [2:0] e2;  logic [5:0] m2;
  logic signed [11:0] q2; logic ovf2, inx2;
  logic        s8;  logic [5:0] e8;  logic [7:0] m8;
  logic signed [11:0] q8; logic ovf8, inx8;

  prod_align #(.EW(2), .MW(2), .BIAS(1),  .OUT_W(12), .LSB_EXP(-4)) u2 (
    .p_sign(s2), .p_exp(e2), .p_sig(m2), .q(q2), .ovf(ovf2), .inexact(inx2));
  prod_align #(.EW(5), .MW(3), .BIAS(15), .OUT_W(12), .LSB_EXP(-4)) u8 (
    .p_sign(s8), .p_exp(e8), .p_sig(m8), .q(q8), .ovf(ovf8), .inexact(inx8));

  task automatic expect_q(input logic s, input int pe, input int ps, input int mw, input int bias,
                          input logic signed [11:0] q, input logic ovf, input logic inx);
    real    v;
    longint mag;
    logic   eovf, einx;
    longint want;
    v    = real'(ps) * (2.0 ** (pe - 2 * bias - 2 * mw + 4));
    mag  = longint'($floor(v));
    einx = (real'(mag) != v);
    eovf = (mag > 2047);
    if (eovf) begin mag = 2047; einx = 1'b0; end
    want = s ? -mag : mag;
    checks++;
    if (longint'(q) !== want || ovf !== eovf || inx !== einx) begin
      failures++;
      $display("FAIL pe=%0d ps=%0d s=%0d: q=%0d ovf=%0d inx=%0d want %0d %0d %0d",
               pe, ps, s, q, ovf, inx, want, eovf, einx);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s8 = 0; e8 = 0; m8 = 0;
    for (int s = 0; s < 2; s++)
      for (int e = 0; e < 8; e++)
        for (int m = 0; m < 64; m++) begin
          s2 = 1'(s); e2 = 3'(e); m2 = 6'(m); #1;
          expect_q(s2, e, m, 2, 1, q2, ovf2, inx2);
        end
    for (int n = 0; n < 3000; n++) begin
      s8 = 1'($urandom);
      e8 = 6'(16 + ($urandom % 26));   // shifts from -14 to +11
      m8 = 8'($urandom);
      #1;
      expect_q(s8, int'(e8), int'(m8), 3, 15, q8, ovf8, inx8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
