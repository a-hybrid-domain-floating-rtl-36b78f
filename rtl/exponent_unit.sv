// exponent_unit: exponent path of the FP8 CIM macro.
//
// It holds the sign and exponent of the ROWS stored weights and, for one
// vector of activations, performs the four steps of FP dot-product
// alignment:
//   1. exponent summation   E_i   = X_E,i + W_E,i (biased sum, bias 2*BIAS)
//   2. Emax identification  Emax  = max E_i over the rows that take part
//   3. difference extraction d_i  = Emax - E_i
//   4. mantissa alignment   x_al_i = X_M,i >> d_i (activation fraction,
//      truncated), the bit-serial stream of the analog sub-MUL.
// The product sign of each row (X_S xor W_S) is formed here too. A row whose
// activation or weight has a zero exponent field is treated as a zero
// product (flush to zero, subnormals are not supported) and is masked out
// through active[i]; it takes no part in Emax.
// The four steps and their order follow the paper, which gives their
// function but not their circuits. Each step is its own module
// (exp_sum_array, emax_identifier, exp_diff_extract, mant_align); this
// module chains them and adds one output register stage. Sign handling, flush to zero and
// keeping the weight exponents in registers are this design's own choices.
// Interface and timing: weight sign/exponent are written with w_we at a
// rising edge. When load is high at a rising edge the activations are
// sampled and all outputs, registered, are valid after that edge and stay
// until the next load.
module exponent_unit #(
  parameter int unsigned ROWS   = hcim_pkg::ROWS,
  parameter int unsigned EXP_W  = hcim_pkg::EXP_W,
  parameter int unsigned MANT_W = hcim_pkg::COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight sign/exponent write port
  input  logic                          w_we,
  input  logic [$clog2(ROWS)-1:0]       w_row,
  input  logic                          w_sign,
  input  logic [EXP_W-1:0]              w_exp,
  // activation vector
  input  logic                          load,
  input  logic [ROWS-1:0]               x_sign,
  input  logic [ROWS-1:0][EXP_W-1:0]    x_exp,
  input  logic [ROWS-1:0][MANT_W-1:0]   x_frac,
  // aligned results
  output logic [ROWS-1:0]               active,
  output logic [ROWS-1:0]               psign,
  output logic [ROWS-1:0][EXP_W:0]      esum,
  output logic [EXP_W:0]                emax,
  output logic [ROWS-1:0][EXP_W:0]      dshift,
  output logic [ROWS-1:0][MANT_W-1:0]   x_frac_q,
  output logic [ROWS-1:0][MANT_W-1:0]   x_al
);

  logic [ROWS-1:0]             act_d, psign_d;
  logic [ROWS-1:0][EXP_W:0]    esum_d, dshift_d;
  logic [EXP_W:0]              emax_d;
  logic [ROWS-1:0][MANT_W-1:0] x_al_d;

  // 1. exponent summation, product sign, zero detection
  exp_sum_array #(.ROWS(ROWS), .EXP_W(EXP_W)) u_sum (
    .clk, .rst_n, .w_we, .w_row, .w_sign, .w_exp, .x_sign, .x_exp,
    .esum(esum_d), .active(act_d), .psign(psign_d)
  );

  // 2. Emax identifier over the active rows
  emax_identifier #(.ROWS(ROWS), .ES_W(EXP_W + 1)) u_emax (
    .esum(esum_d), .active(act_d), .emax(emax_d)
  );

  // 3. exponent differences
  exp_diff_extract #(.ROWS(ROWS), .ES_W(EXP_W + 1)) u_diff (
    .esum(esum_d), .active(act_d), .emax(emax_d), .dshift(dshift_d)
  );

  // 4. activation mantissa alignment
  mant_align #(.ROWS(ROWS), .MANT_W(MANT_W), .DSH_W(EXP_W + 1)) u_align (
    .x_frac, .dshift(dshift_d), .x_al(x_al_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= '0;
      psign    <= '0;
      esum     <= '0;
      emax     <= '0;
      dshift   <= '0;
      x_frac_q <= '0;
      x_al     <= '0;
    end else if (load) begin
      active   <= act_d;
      psign    <= psign_d;
      esum     <= esum_d;
      emax     <= emax_d;
      dshift   <= dshift_d;
      x_frac_q <= x_frac;
      x_al     <= x_al_d;
    end
  end

endmodule
