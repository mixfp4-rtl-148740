// tb_fp32_add -- checks the FP32 partial-sum adder.
//
// Random operand pairs with exponent differences from 0 to beyond the
// significand width, both signs (so carries and deep cancellation occur),
// subnormal operands and results, overflow to infinity, and the special
// values. The expected sum is the double-precision sum, exact for these
// operands, rounded to single precision with ties to even.
module tb_fp32_add;
  import mixfp4_pkg::*;
  import mixfp4_ref_pkg::*;
  int checks = 0, failures = 0;

  fp32_t a, b, y;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check_want(input fp32_t want);
    #1;
    checks++;
    if (y !== want) begin
      failures++;
      $display("FAIL a=%h b=%h y=%h want %h", a, b, y, want);
    end
  endtask

  task automatic check();
    check_want(real_to_fp32(fp32_to_real(a) + fp32_to_real(b)));
  endtask

  function automatic fp32_t rnd(input int e);
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea, eb;
    // Fixed cases.
    a = 32'h3f80_0000; b = 32'h3f80_0000; check();          // 1 + 1
    a = 32'h3f80_0000; b = 32'hbf80_0000; check_want(32'h0); // 1 - 1 = +0
    a = 32'h8000_0000; b = 32'h8000_0000; check_want(32'h8000_0000);
    a = 32'h3f80_0000; b = 32'h3380_0000; check();          // 1 + 2^-24: tie, even
    a = 32'h3f80_0001; b = 32'h3380_0000; check();          // tie, round up
    a = 32'h7f7f_ffff; b = 32'h7f7f_ffff; check_want(32'h7f80_0000);
    a = 32'h0000_0001; b = 32'h0000_0003; check();          // subnormals
    a = 32'h0080_0000; b = 32'h8000_0001; check();          // normal -> subnormal
    a = 32'h7f80_0000; b = 32'h3f80_0000; check_want(32'h7f80_0000);
    a = 32'h7f80_0000; b = 32'hff80_0000; check_want(FP32_QNAN);
    a = 32'h7fc0_0000; b = 32'h3f80_0000; check_want(FP32_QNAN);
    for (int n = 0; n < 20000; n++) begin
      ea = 1 + ($urandom % 254);
      case (n % 4)
        0: eb = ea - 3 + int'($urandom % 7);
        1: eb = ea - 28 + int'($urandom % 57);
        2: eb = 1 + int'($urandom % 254);
        default: eb = ea;
      endcase
      if (eb < 0) eb = 0;
      if (eb > 254) eb = 254;
      a = rnd(ea);
      b = rnd(eb);
      if (n % 50 == 0) a[30:23] = 8'd0;   // subnormal operand
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
