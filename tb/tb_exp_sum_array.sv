// tb_exp_sum_array: self-checking test of the exponent summation array.
// Random weight signs/exponents (zeros included) are written; for random
// activations every row's exponent sum, product sign and active flag are
// compared with values computed here. A write to one row must not change
// the others.
module tb_exp_sum_array;
  localparam int ROWS = 4, EXP_W = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we, w_sign;
  logic [1:0] w_row;
  logic [EXP_W-1:0] w_exp;
  logic [ROWS-1:0] x_sign;
  logic [ROWS-1:0][EXP_W-1:0] x_exp;
  logic [ROWS-1:0][EXP_W:0] esum;
  logic [ROWS-1:0] active, psign;
  int checks = 0, failures = 0;
  int ws [ROWS], we [ROWS];

  exp_sum_array #(.ROWS(ROWS), .EXP_W(EXP_W)) dut (.*);

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
    w_we = 0; w_sign = 0; w_row = 0; w_exp = 0; x_sign = 0; x_exp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      ws[r] = int'($urandom_range(0, 1)); we[r] = int'($urandom_range(0, 15));
      @(negedge clk); w_we = 1; w_row = 2'(r); w_sign = ws[r][0]; w_exp = EXP_W'(we[r]);
    end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 400; t++) begin
      if (t % 4 == 0) begin      // rewrite one row
        int r;
        r = int'($urandom_range(0, ROWS - 1));
        ws[r] = int'($urandom_range(0, 1)); we[r] = int'($urandom_range(0, 15));
        w_we = 1; w_row = 2'(r); w_sign = ws[r][0]; w_exp = EXP_W'(we[r]);
        @(negedge clk); w_we = 0;
      end
      for (int r = 0; r < ROWS; r++) begin
        x_sign[r] = 1'($urandom); x_exp[r] = EXP_W'($urandom_range(0, 15));
      end
      #1;
      for (int r = 0; r < ROWS; r++) begin
        check(int'(esum[r]), int'(x_exp[r]) + we[r], "exponent sum");
        check(int'(active[r]), int'(x_exp[r] != 0 && we[r] != 0), "active");
        check(int'(psign[r]), int'(x_sign[r]) ^ ws[r], "product sign");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
