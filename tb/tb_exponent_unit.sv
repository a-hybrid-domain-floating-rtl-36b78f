// tb_exponent_unit: self-checking test of the exponent path. It writes
// random weight signs and exponents (zero exponents included), loads random
// activation vectors and compares every registered output with a reference
// computed here: per-row exponent sums, the maximum over rows whose two
// exponents are non-zero, the differences, the truncated right-shifted
// activation fractions and the product signs. Outputs must be valid on the
// cycle after load and hold while load is low.
module tb_exponent_unit;
  localparam int ROWS = 4, EXP_W = 4, MANT_W = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we, w_sign, load;
  logic [1:0] w_row;
  logic [EXP_W-1:0] w_exp;
  logic [ROWS-1:0] x_sign;
  logic [ROWS-1:0][EXP_W-1:0] x_exp;
  logic [ROWS-1:0][MANT_W-1:0] x_frac;
  logic [ROWS-1:0] active, psign;
  logic [ROWS-1:0][EXP_W:0] esum, dshift;
  logic [EXP_W:0] emax;
  logic [ROWS-1:0][MANT_W-1:0] x_frac_q, x_al;
  int checks = 0, failures = 0;
  int ws [ROWS], we [ROWS];
  int n_shift_out = 0, n_zero = 0;

  exponent_unit #(.ROWS(ROWS), .EXP_W(EXP_W), .MANT_W(MANT_W)) dut (.*);

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
    int e [ROWS];
    int act [ROWS];
    int mx, d;
    w_we = 0; w_sign = 0; w_row = 0; w_exp = 0; load = 0;
    x_sign = 0; x_exp = 0; x_frac = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      if (t % 10 == 0) begin
        for (int r = 0; r < ROWS; r++) begin
          ws[r] = int'($urandom_range(0, 1));
          we[r] = (t % 30 == 0) ? int'($urandom_range(0, 15)) : int'($urandom_range(1, 15));
          @(negedge clk); w_we = 1; w_row = 2'(r); w_sign = ws[r][0]; w_exp = EXP_W'(we[r]);
        end
        @(negedge clk); w_we = 0;
      end
      for (int r = 0; r < ROWS; r++) begin
        x_sign[r] = 1'($urandom);
        x_exp[r]  = EXP_W'($urandom_range(0, 15));
        x_frac[r] = MANT_W'($urandom);
      end
      load = 1;
      mx = 0;
      for (int r = 0; r < ROWS; r++) begin
        e[r] = int'(x_exp[r]) + we[r];
        act[r] = (x_exp[r] != 0 && we[r] != 0) ? 1 : 0;
        if (act[r] != 0 && e[r] > mx) mx = e[r];
      end
      @(negedge clk);
      load = 0;
      check(int'(emax), mx, "Emax");
      for (int r = 0; r < ROWS; r++) begin
        d = act[r] != 0 ? mx - e[r] : 0;
        if (act[r] == 0) n_zero++;
        if (d >= MANT_W) n_shift_out++;
        check(int'(active[r]), act[r], "active");
        check(int'(esum[r]), e[r], "exponent sum");
        check(int'(dshift[r]), d, "exponent difference");
        check(int'(psign[r]), int'(x_sign[r]) ^ ws[r], "product sign");
        check(int'(x_frac_q[r]), int'(x_frac[r]), "activation fraction");
        check(int'(x_al[r]), d >= 32 ? 0 : int'(x_frac[r]) >> d, "aligned fraction");
      end
      x_exp = '0;                               // outputs must hold without load
      @(negedge clk);
      check(int'(emax), mx, "Emax held");
    end
    check(int'(n_zero > 0 && n_shift_out > 0), 1, "zero rows and full shift-out seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
