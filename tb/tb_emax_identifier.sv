// tb_emax_identifier: self-checking test of the Emax identifier. Random
// exponent sums and active masks (including none active and the largest
// sum on an inactive row) are applied; Emax must be the largest sum over
// the active rows, 0 when none is active.
module tb_emax_identifier;
  localparam int ROWS = 4, ES_W = 5;
  logic [ROWS-1:0][ES_W-1:0] esum;
  logic [ROWS-1:0] active;
  logic [ES_W-1:0] emax;
  int checks = 0, failures = 0;
  int n_masked_max = 0;

  emax_identifier #(.ROWS(ROWS), .ES_W(ES_W)) dut (.*);

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
    int mx, mall;
    for (int t = 0; t < 2000; t++) begin
      mx = 0; mall = 0;
      active = ROWS'($urandom);
      for (int r = 0; r < ROWS; r++) begin
        esum[r] = ES_W'($urandom_range(0, 30));
        if (active[r] && int'(esum[r]) > mx) mx = int'(esum[r]);
        if (int'(esum[r]) > mall) mall = int'(esum[r]);
      end
      if (mall > mx) n_masked_max++;
      #1;
      check(int'(emax), mx, "Emax");
      #9;
    end
    check(int'(n_masked_max > 0), 1, "largest sum on an inactive row seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
