// tb_sram_lcc_cell: self-checking test of one SRAM bit cell with its local
// computing cell. It writes 0 and 1 into the cell, then applies every
// combination of activation bit, column select and sub-MUL enable and
// compares LAS, LAC and MUL with the half-adder truth table
// (LAS = X xor Q, LAC = X and Q when selected, MUL = X and Q when enabled).
// It also checks that a cycle without wl keeps the stored bit.
module tb_sram_lcc_cell;
  logic clk = 1'b0;
  logic wl, bl, x_m, sel, mul_en;
  logic q, las, lac, mul;
  int checks = 0, failures = 0;

  sram_lcc_cell dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    #2000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = 0; bl = 0; x_m = 0; sel = 0; mul_en = 0;
    for (int w = 0; w < 2; w++) begin
      @(negedge clk); wl = 1; bl = w[0];
      @(negedge clk); wl = 0; bl = ~w[0];
      @(negedge clk);                      // bl toggled, wl low: must hold
      check(q, w[0], "stored bit");
      for (int v = 0; v < 8; v++) begin
        {x_m, sel, mul_en} = v[2:0];
        #1;
        check(las, sel && (x_m != w[0]), "LAS");
        check(lac, sel && x_m && w[0], "LAC");
        check(mul, mul_en && x_m && w[0], "MUL");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
