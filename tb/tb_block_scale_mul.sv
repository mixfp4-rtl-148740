// tb_block_scale_mul -- checks the per-block scale multiply.
//
// Random partial dot products (16-bit, units of 2^-4) and random packed
// scales with random type bits. The FP32 output must equal, exactly,
// partial/16 * sA * sB with sA, sB the unsigned E4M3 values of bits [6:0];
// the type bit must have no effect. Also checks zero and the NaN code.
module tb_block_scale_mul;
  import mixfp4_pkg::*;
  import mixfp4_ref_pkg::*;
  int checks = 0, failures = 0;

  logic signed [15:0] partial;
  scale_packed_t      sa, sb;
  fp32_t              y;

  block_scale_mul #(.PW(16)) dut (.partial(partial), .scale_a(sa), .scale_b(sb), .y(y));

  task automatic check();
    real want;
    #1;
    checks++;
    if (sa[6:0] == 7'h7f || sb[6:0] == 7'h7f) begin
      if (y !== FP32_QNAN) begin
        failures++;
        $display("FAIL NaN scale: y=%h", y);
      end
    end else begin
      want = (real'(partial) / 16.0) * e4m3_value(sa[6:0]) * e4m3_value(sb[6:0]);
      if (fp32_to_real(y) != want || (partial == 0 && y != 0)) begin
        failures++;
        $display("FAIL p=%0d sa=%h sb=%h y=%h (%g) want %g", partial, sa, sb, y,
                 fp32_to_real(y), want);
      end
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
    partial = 0; sa = 8'h38; sb = 8'hb8; check();   // zero, T = 0 and 1
    partial = -16'sd32768; sa = 8'h7e; sb = 8'hfe; check();  // largest magnitudes
    partial = 16'sd1; sa = 8'h01; sb = 8'h81; check();       // smallest
    partial = 16'sd16; sa = 8'h7f; sb = 8'h38; check();      // NaN scale
    for (int n = 0; n < 5000; n++) begin
      partial = 16'($urandom);
      sa = 8'($urandom);
      sb = 8'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
