// tb_dot_adder_tree -- checks the column adders and adder tree.
//
// Random signed 12-bit products, plus the all-maximum and all-minimum
// corners; the output must equal the integer sum of all 16 inputs.
module tb_dot_adder_tree;
  int checks = 0, failures = 0;
  logic signed [11:0] prod [4][4];
  logic signed [15:0] sum;

  dot_adder_tree #(.COLS(4), .IN_W(12)) dut (.prod(prod), .sum(sum));

  task automatic check();
    longint want = 0;
    for (int c = 0; c < 4; c++) for (int j = 0; j < 4; j++) want += longint'(prod[c][j]);
    #1;
    checks++;
    if (longint'(sum) !== want) begin
      failures++;
      $display("FAIL sum=%0d want %0d", sum, want);
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
    for (int c = 0; c < 4; c++) for (int j = 0; j < 4; j++) prod[c][j] = 12'sd2047;
    check();
    for (int c = 0; c < 4; c++) for (int j = 0; j < 4; j++) prod[c][j] = -12'sd2048;
    check();
    for (int n = 0; n < 2000; n++) begin
      for (int c = 0; c < 4; c++) for (int j = 0; j < 4; j++) prod[c][j] = 12'($urandom);
      check();
    end
    // One non-zero input at a time: every position reaches the output.
    for (int k = 0; k < 16; k++) begin
      for (int c = 0; c < 4; c++) for (int j = 0; j < 4; j++) prod[c][j] = '0;
      prod[k / 4][k % 4] = 12'(k + 1);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
