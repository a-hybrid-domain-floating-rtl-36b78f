// tb_mantissa_accuracy: accuracy experiment of the hybrid mantissa path
// with full 4-bit operands: 65 groups of four 4-bit input fractions and
// four 4-bit weight fractions, all exponents equal and all signs positive.
//
// The testbench plays the sequencer: it writes the weights into the array,
// runs four sub-ADD cycles (one column each) into the LDAT and four
// sub-MUL cycles through the capacitor/ADC model into shift-and-add, and
// lets PM add both. The ground truth is the exact sum of mantissa products
//   sum_i (16 + X_i) * (16 + W_i)   (units of 2^-8).
// Checks: the sub-ADD part is exact; the only error is the ADC truncation,
// so 0 <= truth - result <= 7 * (1 + 2 + 4 + 8) = 105 units; and the
// largest relative error is reported.
module tb_mantissa_accuracy;
  localparam int ROWS = 4, COLS = 4;
  logic clk = 1'b0, rst_n = 1'b0;

  logic w_we;
  logic [1:0] w_row, rd_row;
  logic [COLS-1:0] w_data, rd_data;
  logic [ROWS-1:0] x_bits;
  logic [COLS-1:0] add_col;
  logic mul_en, convert, code_valid, clear, add_step, pm_en, pm_valid;
  logic [ROWS-1:0][1:0] row_ps;
  logic [ROWS-1:0][COLS-1:0] mul_bits;
  logic [2:0] code;
  logic [1:0] add_idx, conv_idx;
  logic signed [15:0] sub_add, sub_mul, result;
  logic [4:0] res_emax;

  mantissa_mac_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .w_we, .w_row, .w_data, .rd_row, .rd_data,
    .x_bits, .add_col, .mul_en, .row_ps, .mul_bits);
  cap_adc #(.ROWS(ROWS), .COLS(COLS), .ADC_BITS(3)) u_adc (
    .clk, .rst_n, .mul_bits, .convert, .code, .code_valid);
  ldat #(.ROWS(ROWS), .MANT_W(COLS), .DSH_W(5), .ACC_W(16)) u_ldat (
    .clk, .rst_n, .clear, .step(add_step), .bit_idx(add_idx), .row_ps,
    .active(4'hF), .psign(4'h0), .dshift('0), .sub_add);
  shift_add #(.MANT_W(COLS), .ADC_BITS(3), .FS_BITS(6), .ACC_W(16)) u_sa (
    .clk, .rst_n, .clear, .step(code_valid), .bit_idx(conv_idx), .neg(1'b0),
    .code, .sub_mul);
  pm #(.ACC_W(16), .EMX_W(5)) u_pm (
    .clk, .rst_n, .en(pm_en), .sub_add, .sub_mul, .emax(5'd14),
    .result, .res_emax, .valid(pm_valid));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x [ROWS], w [ROWS];
    int truth, exact_add, err, max_err;
    real rel, max_rel, sum_rel;
    w_we = 0; w_row = 0; w_data = 0; rd_row = 0; x_bits = 0; add_col = 0;
    mul_en = 0; convert = 0; clear = 0; add_step = 0; pm_en = 0;
    add_idx = 0; conv_idx = 0;
    max_err = 0; max_rel = 0.0; sum_rel = 0.0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 65; g++) begin
      for (int r = 0; r < ROWS; r++) begin
        x[r] = int'($urandom_range(0, 15));
        w[r] = int'($urandom_range(0, 15));
        @(negedge clk); w_we = 1; w_row = 2'(r); w_data = COLS'(w[r]);
      end
      @(negedge clk); w_we = 0; clear = 1;
      @(negedge clk); clear = 0;
      // sub-ADD: column j, activation bit j
      for (int j = 0; j < COLS; j++) begin
        add_col = COLS'(1) << j; add_step = 1; add_idx = 2'(j);
        for (int r = 0; r < ROWS; r++) x_bits[r] = x[r][j];
        @(negedge clk);
      end
      add_col = '0; add_step = 0;
      // sub-MUL: activation bit k on all rows, one conversion per cycle
      for (int k = 0; k < COLS; k++) begin
        mul_en = 1; convert = 1;
        for (int r = 0; r < ROWS; r++) x_bits[r] = x[r][k];
        @(negedge clk);
        conv_idx = 2'(k);            // index of the code now in flight
      end
      mul_en = 0; convert = 0; x_bits = '0;
      @(negedge clk);                 // last code accumulated
      pm_en = 1;
      @(negedge clk);
      pm_en = 0;
      check(int'(pm_valid), 1, "PM valid");
      truth = 0; exact_add = 0;
      for (int r = 0; r < ROWS; r++) begin
        truth += (16 + x[r]) * (16 + w[r]);
        exact_add += (16 + x[r] + w[r]) * 16;
      end
      check(int'(sub_add), exact_add, "sub-ADD exact");
      err = truth - int'(result);
      check(int'(err >= 0 && err <= 105), 1, "error within ADC truncation bound");
      rel = real'(err) / real'(truth);
      sum_rel += rel;
      if (rel > max_rel) max_rel = rel;
      if (err > max_err) max_err = err;
    end
    $display("65 groups: largest error %0d/256, largest relative error %f %%, mean %f %%",
             max_err, max_rel * 100.0, sum_rel / 65.0 * 100.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
