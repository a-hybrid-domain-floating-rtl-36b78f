// tb_hcim_macro: end-to-end test of the hybrid-domain FP8 CIM macro at its
// default size (4 rows, 4 mantissa columns, 3-bit ADC).
//
// Random FP8 E4M3 weights are written (and their mantissas read back), then
// random activation vectors are applied. For every operation an independent
// reference computes, from the FP8 fields alone:
//   * per row: fractions X, W (3 bits, placed as 4-bit x/16), exponent sum,
//     product sign, zero flag; Emax and the differences d_i;
//   * sub-ADD = sum (+/-) ((16 + X + W) * 16) >> d_i;
//   * sub-MUL = sum over the positive and the negative pass and the input
//     bits k of (+/-) floor(S_k / 8) * 8 * 2^k, S_k = sum_i (X_i >> d_i)[k] * W_i;
// and expects result = sub-ADD + sub-MUL and res_emax = Emax bit-exactly.
// The latency from start to done must be 3 + 4*(1 + passes) cycles.
// It also compares against the exact real dot product and reports the
// largest relative error. Each mechanism of the design must occur at least
// once: zero (flushed) rows, exponent alignment, full shift-out, a negative
// sub-MUL pass, two passes, a skipped pass, no pass at all, and an ADC code
// that truncates.
module tb_hcim_macro;
  import hcim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_we;
  logic [1:0] w_row, rd_row;
  fp8_t w_data;
  logic [3:0] rd_mant;
  logic start;
  fp8_t [3:0] x_vec;
  logic busy, done;
  logic signed [15:0] result;
  logic [4:0] res_emax;

  hcim_macro dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_zero_row = 0, n_align = 0, n_shift_out = 0, n_neg_pass = 0;
  int n_two_pass = 0, n_skip = 0, n_no_pass = 0, n_trunc = 0;
  real max_rel_err = 0.0;
  fp8_t wmem [4];

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp8_t rand_fp8(input int emin, input int emax_, input int zero_pct);
    fp8_t f;
    f.sign = 1'($urandom);
    f.frac = 3'($urandom);
    f.exp  = ($urandom_range(0, 99) < zero_pct) ? 4'd0 : 4'($urandom_range(emin, emax_));
    return f;
  endfunction

  function automatic real pow2(input int n);
    real v;
    v = 1.0;
    for (int i = 0; i < n; i++) v = v * 2.0;
    for (int i = 0; i > n; i--) v = v / 2.0;
    return v;
  endfunction

  function automatic real fp8_val(input fp8_t f);
    real m;
    if (f.exp == 0) return 0.0;
    m = 1.0 + real'(f.frac) / 8.0;
    return (f.sign ? -m : m) * pow2(int'(f.exp) - 7);
  endfunction

  task automatic write_weights(input int emin, input int emax_, input int zero_pct);
    for (int r = 0; r < 4; r++) begin
      wmem[r] = rand_fp8(emin, emax_, zero_pct);
      @(negedge clk);
      w_we = 1; w_row = 2'(r); w_data = wmem[r];
    end
    @(negedge clk);
    w_we = 0;
    for (int r = 0; r < 4; r++) begin
      rd_row = 2'(r); #1;
      check(int'(rd_mant), int'({wmem[r].frac, 1'b0}), "weight mantissa read-back");
    end
  endtask

  task automatic run_op(input int emin, input int emax_, input int zero_pct, input int sign_mode);
    int xf [4], wf [4], e [4], d [4], act [4], sg [4];
    int mx, sadd, smul, s, passes, lat, expv;
    bit has_pos, has_neg;
    real exact, got, rel;
    for (int r = 0; r < 4; r++) begin
      x_vec[r] = rand_fp8(emin, emax_, zero_pct);
      if (sign_mode == 1) x_vec[r].sign = wmem[r].sign;        // all products positive
      if (sign_mode == 2) x_vec[r].sign = ~wmem[r].sign;       // all products negative
    end
    // reference model
    mx = 0; has_pos = 0; has_neg = 0;
    for (int r = 0; r < 4; r++) begin
      xf[r]  = int'(x_vec[r].frac) * 2;
      wf[r]  = int'(wmem[r].frac) * 2;
      e[r]   = int'(x_vec[r].exp) + int'(wmem[r].exp);
      act[r] = (x_vec[r].exp != 0 && wmem[r].exp != 0) ? 1 : 0;
      sg[r]  = int'(x_vec[r].sign ^ wmem[r].sign);
      if (act[r] != 0 && e[r] > mx) mx = e[r];
      if (act[r] == 0) n_zero_row++;
    end
    sadd = 0;
    for (int r = 0; r < 4; r++) begin
      d[r] = act[r] != 0 ? mx - e[r] : 0;
      if (act[r] != 0) begin
        if (sg[r] != 0) has_neg = 1; else has_pos = 1;
        if (d[r] > 0 && d[r] < 4) n_align++;
        if (d[r] >= 4) n_shift_out++;
        sadd += (sg[r] != 0 ? -1 : 1) * (((16 + xf[r] + wf[r]) * 16) >> d[r]);
      end
    end
    smul = 0;
    for (int p = 0; p < 2; p++) begin
      for (int k = 0; k < 4; k++) begin
        s = 0;
        for (int r = 0; r < 4; r++)
          if (act[r] != 0 && sg[r] == p && d[r] < 4 && (((xf[r] >> d[r]) >> k) & 1) != 0) s += wf[r];
        if (s % 8 != 0) n_trunc++;
        smul += (p != 0 ? -1 : 1) * ((s / 8) * 8 << k);
      end
    end
    passes = int'(has_pos) + int'(has_neg);
    if (has_neg) n_neg_pass++;
    if (passes == 2) n_two_pass++;
    if (passes == 1) n_skip++;
    if (passes == 0) n_no_pass++;
    expv = sadd + smul;
    // run the macro
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 0;   // edges counted after the one that sampled start
    while (!done && lat < 100) begin
      @(negedge clk);
      lat++;
    end
    check(lat, 3 + 4 * (1 + passes), "latency start to done");
    check(int'(result), expv, "result");
    check(int'(res_emax), mx, "Emax");
    @(negedge clk);
    check(int'(busy), 0, "idle after done");
    // accuracy against the exact dot product
    exact = 0.0;
    for (int r = 0; r < 4; r++) exact += fp8_val(x_vec[r]) * fp8_val(wmem[r]);
    got = real'(result) * pow2(int'(res_emax) - 14 - 8);
    if (exact != 0.0) begin
      rel = (got - exact) / exact;
      if (rel < 0.0) rel = -rel;
      if (passes == 1 && rel > max_rel_err) max_rel_err = rel;
    end
  endtask

  initial begin
    w_we = 0; w_row = 0; w_data = '0; rd_row = 0; start = 0; x_vec = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      if (t % 8 == 0) write_weights(5, 9, (t % 40 == 0) ? 30 : 0);
      case (t % 5)
        0: run_op(7, 7, 0, 1);          // equal exponents, positive products
        1: run_op(6, 8, 0, 0);          // small exponent spread, mixed signs
        2: run_op(1, 15, 10, 0);        // wide spread: shift-out, zero rows
        3: run_op(5, 9, 0, 2);          // all products negative
        default: run_op(1, 15, 100, 0); // all activations zero
      endcase
    end
    $display("mechanisms: zero_row=%0d align=%0d shift_out=%0d neg_pass=%0d two_pass=%0d skip=%0d no_pass=%0d adc_trunc=%0d",
             n_zero_row, n_align, n_shift_out, n_neg_pass, n_two_pass, n_skip, n_no_pass, n_trunc);
    $display("largest relative error of single-sign dot products: %f %%", max_rel_err * 100.0);
    check(int'(n_zero_row > 0), 1, "zero row seen");
    check(int'(n_align > 0), 1, "alignment seen");
    check(int'(n_shift_out > 0), 1, "shift-out seen");
    check(int'(n_neg_pass > 0), 1, "negative pass seen");
    check(int'(n_two_pass > 0), 1, "two passes seen");
    check(int'(n_skip > 0), 1, "skipped pass seen");
    check(int'(n_no_pass > 0), 1, "no pass seen");
    check(int'(n_trunc > 0), 1, "ADC truncation seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
