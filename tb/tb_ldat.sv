// tb_ldat: self-checking test of the local digital adder tree. For random
// weight and activation fractions it drives, for j = 0..3, the 2-bit
// partial sums X_i[j] + W_i[j] a row would produce, then checks the aligned,
// signed sub-ADD sum against
//   sum over active rows of (+/-) ((16 + X_i + W_i) * 16) >> d_i
// computed here from the whole fractions. clear must empty the tree.
module tb_ldat;
  localparam int ROWS = 4, MANT_W = 4, DSH_W = 5, ACC_W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear, step;
  logic [1:0] bit_idx;
  logic [ROWS-1:0][1:0] row_ps;
  logic [ROWS-1:0] active, psign;
  logic [ROWS-1:0][DSH_W-1:0] dshift;
  logic signed [ACC_W-1:0] sub_add;
  int checks = 0, failures = 0;

  ldat #(.ROWS(ROWS), .MANT_W(MANT_W), .DSH_W(DSH_W), .ACC_W(ACC_W)) dut (.*);

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
    int x [ROWS], w [ROWS];
    int expv;
    clear = 0; step = 0; bit_idx = 0; row_ps = 0; active = 0; psign = 0; dshift = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      clear = 1;
      @(negedge clk);
      clear = 0;
      active = '1; psign = '0; dshift = '0; #1;
      check(int'(sub_add), ROWS * 256, "cleared tree holds only the hidden-bit terms");
      for (int r = 0; r < ROWS; r++) begin
        x[r] = int'($urandom_range(0, 15));
        w[r] = int'($urandom_range(0, 15));
        active[r] = ($urandom_range(0, 7) != 0);
        psign[r]  = 1'($urandom);
        dshift[r] = DSH_W'($urandom_range(0, 9));
      end
      for (int j = 0; j < MANT_W; j++) begin
        step = 1; bit_idx = 2'(j);
        for (int r = 0; r < ROWS; r++)
          row_ps[r] = 2'(((x[r] >> j) & 1) + ((w[r] >> j) & 1));
        @(negedge clk);
      end
      step = 0; row_ps = '0;
      expv = 0;
      for (int r = 0; r < ROWS; r++)
        if (active[r])
          expv += (psign[r] ? -1 : 1) * (((16 + x[r] + w[r]) * 16) >> dshift[r]);
      #1;
      check(int'(sub_add), expv, "sub-ADD sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
