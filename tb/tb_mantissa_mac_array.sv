// tb_mantissa_mac_array: self-checking test of the 4x4 mantissa array.
// Random weight mantissas are written row by row and read back. Then, for
// random activation bits, each column is selected in turn and every row's
// 2-bit partial sum must equal X_i + W_i[j]; with no column selected the
// row lines must stay 0; with mul_en every cell's MUL output must equal
// X_i and W_i[j].
module tb_mantissa_mac_array;
  localparam int ROWS = 4, COLS = 4;
  logic clk = 1'b0;
  logic w_we;
  logic [1:0] w_row, rd_row;
  logic [COLS-1:0] w_data, rd_data;
  logic [ROWS-1:0] x_bits;
  logic [COLS-1:0] add_col;
  logic mul_en;
  logic [ROWS-1:0][1:0] row_ps;
  logic [ROWS-1:0][COLS-1:0] mul_bits;
  logic [COLS-1:0] wref [ROWS];
  int checks = 0, failures = 0;

  mantissa_mac_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

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
    w_we = 0; w_row = 0; w_data = 0; rd_row = 0; x_bits = 0; add_col = 0; mul_en = 0;
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        wref[r] = COLS'($urandom);
        @(negedge clk); w_we = 1; w_row = 2'(r); w_data = wref[r];
      end
      @(negedge clk); w_we = 0;
      for (int r = 0; r < ROWS; r++) begin
        rd_row = 2'(r); #1;
        check(int'(rd_data), int'(wref[r]), "read back");
      end
      for (int k = 0; k < 4; k++) begin
        x_bits = ROWS'($urandom);
        add_col = '0; mul_en = 0; #1;
        for (int r = 0; r < ROWS; r++) check(int'(row_ps[r]), 0, "idle row lines");
        for (int j = 0; j < COLS; j++) begin
          add_col = COLS'(1) << j; #1;
          for (int r = 0; r < ROWS; r++)
            check(int'(row_ps[r]), int'(x_bits[r]) + int'(wref[r][j]), "sub-ADD partial sum");
          @(negedge clk);
        end
        add_col = '0; mul_en = 1; #1;
        for (int r = 0; r < ROWS; r++)
          for (int j = 0; j < COLS; j++)
            check(int'(mul_bits[r][j]), int'(x_bits[r] && wref[r][j]), "MUL bit");
        @(negedge clk); mul_en = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
