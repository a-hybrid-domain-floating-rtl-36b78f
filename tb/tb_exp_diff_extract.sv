// tb_exp_diff_extract: self-checking test of the exponent difference
// extractor. For random exponent sums, active masks and an Emax not below
// any active sum, every active row must get Emax - E_i and every inactive
// row 0.
module tb_exp_diff_extract;
  localparam int ROWS = 4, ES_W = 5;
  logic [ROWS-1:0][ES_W-1:0] esum, dshift;
  logic [ROWS-1:0] active;
  logic [ES_W-1:0] emax;
  int checks = 0, failures = 0;

  exp_diff_extract #(.ROWS(ROWS), .ES_W(ES_W)) dut (.*);

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
    int mx;
    for (int t = 0; t < 2000; t++) begin
      mx = 0;
      active = ROWS'($urandom);
      for (int r = 0; r < ROWS; r++) begin
        esum[r] = ES_W'($urandom_range(0, 30));
        if (active[r] && int'(esum[r]) > mx) mx = int'(esum[r]);
      end
      emax = ES_W'(mx);
      #1;
      for (int r = 0; r < ROWS; r++)
        check(int'(dshift[r]), active[r] ? mx - int'(esum[r]) : 0, "difference");
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
