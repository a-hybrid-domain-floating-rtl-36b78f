// tb_mant_align: self-checking test of the mantissa alignment. Every
// fraction 0..15 is shifted by every difference 0..31; the result must be
// floor(x / 2^d), which is 0 for d >= 4.
module tb_mant_align;
  localparam int ROWS = 4, MANT_W = 4, DSH_W = 5;
  logic [ROWS-1:0][MANT_W-1:0] x_frac, x_al;
  logic [ROWS-1:0][DSH_W-1:0] dshift;
  int checks = 0, failures = 0;

  mant_align #(.ROWS(ROWS), .MANT_W(MANT_W), .DSH_W(DSH_W)) dut (.*);

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 16; x++)
      for (int d = 0; d < 32; d++) begin
        for (int r = 0; r < ROWS; r++) begin
          x_frac[r] = MANT_W'((x + r) % 16);
          dshift[r] = DSH_W'((d + 3 * r) % 32);
        end
        #1;
        for (int r = 0; r < ROWS; r++) begin
          int dd;
          dd = (d + 3 * r) % 32;
          check(int'(x_al[r]), dd >= MANT_W ? 0 : ((x + r) % 16) / (1 << dd), "aligned fraction");
        end
        #9;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
