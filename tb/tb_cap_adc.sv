// tb_cap_adc: self-checking test of the capacitor array and flash ADC
// model. For random per-cell MUL patterns it computes the weighted count
// S = sum_i sum_j MUL[i][j]*2^j (0..60) and expects the 3 most significant
// bits of its 6-bit value, floor(S/8), one cycle after convert, with
// code_valid high only in that cycle. Every code 0..7 must be seen.
module tb_cap_adc;
  localparam int ROWS = 4, COLS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [ROWS-1:0][COLS-1:0] mul_bits;
  logic convert;
  logic [2:0] code;
  logic code_valid;
  int checks = 0, failures = 0;
  bit [7:0] seen;

  cap_adc #(.ROWS(ROWS), .COLS(COLS), .ADC_BITS(3)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    logic [ROWS-1:0] x;
    seen = '0;
    mul_bits = '0; convert = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      // a random activation pattern against random weights, as in the array
      x = ROWS'($urandom);
      for (int i = 0; i < ROWS; i++) mul_bits[i] = x[i] ? COLS'($urandom) : '0;
      if (t % 50 == 0) mul_bits = '1;      // full scale, S = 60
      s = 0;
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) s += int'(mul_bits[i][j]) << j;
      convert = 1;
      @(negedge clk);
      convert = 0;
      mul_bits = '0;                        // the code must not follow later inputs
      check(int'(code_valid), 1, "code_valid after convert");
      check(int'(code), s >> 3, "ADC code");
      seen[code] = 1'b1;
      @(negedge clk);
      check(int'(code_valid), 0, "code_valid one cycle only");
    end
    check(int'(seen), 255, "all codes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
