// tb_mixfp4_decoder -- exhaustive test of the MixFP4 element decoder.
//
// Drives all 16 element codes in both block formats and checks that the
// E2M2 output has the value of the element as defined by its format (E2M1,
// or E1M2 times 2), and that the bit patterns printed in the paper's decode
// figure come out (e.g. E1M2 101 -> E2M2 1101 = 5).
module tb_mixfp4_decoder;
  import mixfp4_pkg::*;
  import mixfp4_ref_pkg::*;

  fp4_t     din;
  fp4_fmt_e t;
  e2m2_t    dout;
  int       checks = 0, failures = 0;

  mixfp4_decoder dut (.din(din), .t(t), .dout(dout));

  function automatic real e2m2_value(input logic [4:0] x);
    int  e, m;
    real v;
    e = int'(x[3:2]);
    m = int'(x[1:0]);
    if (e == 0) v = m / 4.0;
    else        v = (2.0 ** (e - 1)) * (1.0 + m / 4.0);
    return x[4] ? -v : v;
  endfunction

  task automatic check_bits(input logic [3:0] code, input fp4_fmt_e tt, input logic [3:0] mag);
    din = code; t = tt; #1;
    checks++;
    if ({dout.e, dout.m} !== mag) begin
      failures++;
      $display("FAIL pattern code=%b T=%0d got %b want %b", code, tt, {dout.e, dout.m}, mag);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int tt = 0; tt < 2; tt++) begin
      for (int c = 0; c < 16; c++) begin
        din = 4'(c); t = fp4_fmt_e'(tt); #1;
        checks++;
        if (e2m2_value(dout) != fp4_value(4'(c), 1'(tt)) || dout.s != din[3]) begin
          failures++;
          $display("FAIL code=%b T=%0d got %f want %f", din, tt, e2m2_value(dout),
                   fp4_value(4'(c), 1'(tt)));
        end
      end
    end
    // Patterns printed in the decode figure.
    check_bits(4'b0100, FMT_E2M1, 4'b1000);
    check_bits(4'b0101, FMT_E2M1, 4'b1010);
    check_bits(4'b0110, FMT_E2M1, 4'b1100);
    check_bits(4'b0111, FMT_E2M1, 4'b1110);
    check_bits(4'b0100, FMT_E1M2, 4'b1100);
    check_bits(4'b0101, FMT_E1M2, 4'b1101);
    check_bits(4'b0110, FMT_E1M2, 4'b1110);
    check_bits(4'b0111, FMT_E1M2, 4'b1111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
