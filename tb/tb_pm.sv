// tb_pm: self-checking test of the PM merge stage: with en high the
// registered result must be sub_add + sub_mul and res_emax the Emax input,
// valid must pulse for exactly the following cycle, and the outputs must
// hold while en is low.
module tb_pm;
  localparam int ACC_W = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic en;
  logic signed [ACC_W-1:0] sub_add, sub_mul, result;
  logic [4:0] emax, res_emax;
  logic valid;
  int checks = 0, failures = 0;

  pm #(.ACC_W(ACC_W), .EMX_W(5)) dut (.*);

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
    int a, b, e;
    en = 0; sub_add = 0; sub_mul = 0; emax = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      a = int'($urandom_range(0, 3000)) - 1500;
      b = int'($urandom_range(0, 2000)) - 1000;
      e = int'($urandom_range(0, 30));
      sub_add = ACC_W'(a); sub_mul = ACC_W'(b); emax = 5'(e); en = 1;
      @(negedge clk);
      en = 0; sub_add = 0; sub_mul = 0; emax = 0;
      check(int'(valid), 1, "valid");
      check(int'(result), a + b, "result");
      check(int'(res_emax), e, "res_emax");
      @(negedge clk);
      check(int'(valid), 0, "valid one cycle");
      check(int'(result), a + b, "result held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
