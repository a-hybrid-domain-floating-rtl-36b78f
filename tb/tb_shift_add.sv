// tb_shift_add: self-checking test of the sub-MUL shift-and-add. Random
// sequences of 3-bit ADC codes, input-bit indices and pass signs are
// applied; the signed sum must equal sum (+/-) code * 8 * 2^k computed here.
// clear must zero it and cycles without step must leave it unchanged.
module tb_shift_add;
  localparam int ACC_W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, step, neg;
  logic [1:0] bit_idx;
  logic [2:0] code;
  logic signed [ACC_W-1:0] sub_mul;
  int checks = 0, failures = 0;

  shift_add #(.MANT_W(4), .ADC_BITS(3), .FS_BITS(6), .ACC_W(ACC_W)) dut (.*);

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
    int expv;
    clear = 0; step = 0; neg = 0; bit_idx = 0; code = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      clear = 1;
      @(negedge clk);
      clear = 0;
      check(int'(sub_mul), 0, "cleared");
      expv = 0;
      for (int n = 0; n < 8; n++) begin
        step = ($urandom_range(0, 4) != 0);
        bit_idx = 2'($urandom);
        neg = 1'($urandom);
        code = 3'($urandom);
        if (step) expv += (neg ? -1 : 1) * (int'(code) * 8 << bit_idx);
        @(negedge clk);
        check(int'(sub_mul), expv, "running sum");
      end
      step = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
