// tb_fp_mul -- checks the three multiplier formats of the slice.
//
// Instantiates fp_mul as E2M2 (exhaustive, 1024 operand pairs), E5M3 and
// E8M10 (random operands) and compares the exact product
// p_sig * 2^(p_exp - 2*bias - 2*MW) with the product of the operand values
// computed in real arithmetic from the format definitions. The E2M2 product
// sign must be the XOR of the operand signs, zero products included.
module tb_fp_mul;
  int checks = 0, failures = 0;

  logic [4:0]  a2, b2;   logic s2; logic [2:0] e2; logic [5:0]  m2;
  logic [8:0]  a8, b8;   logic s8; logic [5:0] e8; logic [7:0]  m8;
  logic [18:0] a16, b16; logic s16; logic [8:0] e16; logic [21:0] m16;

  fp_mul #(.EW(2), .MW(2))  u2  (.a(a2),  .b(b2),  .p_sign(s2),  .p_exp(e2),  .p_sig(m2));
  fp_mul #(.EW(5), .MW(3))  u8  (.a(a8),  .b(b8),  .p_sign(s8),  .p_exp(e8),  .p_sig(m8));
  fp_mul #(.EW(8), .MW(10)) u16 (.a(a16), .b(b16), .p_sign(s16), .p_exp(e16), .p_sig(m16));

  function automatic real fval(input logic [31:0] x, input int ew, input int mw, input int bias);
    int  e, m;
    real v;
    e = int'((x >> mw) & ((1 << ew) - 1));
    m = int'(x & ((1 << mw) - 1));
    if (e == 0) v = (m / (2.0 ** mw)) * (2.0 ** (1 - bias));
    else        v = (1.0 + m / (2.0 ** mw)) * (2.0 ** (e - bias));
    return x[ew + mw] ? -v : v;
  endfunction

  function automatic real pval(input logic s, input int pe, input longint ps,
                               input int mw, input int bias);
    real v;
    v = real'(ps) * (2.0 ** (pe - 2 * bias - 2 * mw));
    return s ? -v : v;
  endfunction

  task automatic cmp_sign(input logic got, input logic want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s sign got %b want %b", what, got, want);
    end
  endtask

  task automatic cmp(input real got, input real want, input string what);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s got %g want %g", what, got, want);
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
    a8 = '0; b8 = '0; a16 = '0; b16 = '0;
    for (int i = 0; i < 32; i++) begin
      for (int j = 0; j < 32; j++) begin
        a2 = 5'(i); b2 = 5'(j); #1;
        cmp(pval(s2, int'(e2), longint'(m2), 2, 1),
            fval(32'(a2), 2, 2, 1) * fval(32'(b2), 2, 2, 1), "E2M2");
        cmp_sign(s2, a2[4] ^ b2[4], "E2M2");
      end
    end
    for (int n = 0; n < 2000; n++) begin
      a8  = 9'($urandom);  b8  = 9'($urandom);
      a16 = 19'($urandom); b16 = 19'($urandom);
      #1;
      cmp(pval(s8, int'(e8), longint'(m8), 3, 15),
          fval(32'(a8), 5, 3, 15) * fval(32'(b8), 5, 3, 15), "E5M3");
      cmp(pval(s16, int'(e16), longint'(m16), 10, 127),
          fval(32'(a16), 8, 10, 127) * fval(32'(b16), 8, 10, 127), "E8M10");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
