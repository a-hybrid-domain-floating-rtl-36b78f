// exp_sum_array: exponent summation array of the exponent unit.
//
// It stores the sign and biased exponent of each row's weight and adds,
// row by row, the exponent of the activation applied to that row:
// E_i = X_E,i + W_E,i (a biased sum, bias 2*BIAS). It also forms the
// product sign X_S xor W_S and a flag that the row takes part, which is
// false when either exponent field is 0 (flush to zero; subnormals are not
// supported).
// The paper names the summation array as the first step of the exponent
// unit and draws one adder per stored weight exponent; keeping the signs
// here and the zero test are this design's own choices.
// Interface and timing: weights are written with w_we at a rising clock
// edge (asynchronous active-low reset clears them); all outputs are
// combinational from the activation inputs and the stored weights.
module exp_sum_array #(
  parameter int unsigned ROWS  = hcim_pkg::ROWS,
  parameter int unsigned EXP_W = hcim_pkg::EXP_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        w_we,
  input  logic [$clog2(ROWS)-1:0]     w_row,
  input  logic                        w_sign,
  input  logic [EXP_W-1:0]            w_exp,
  input  logic [ROWS-1:0]             x_sign,
  input  logic [ROWS-1:0][EXP_W-1:0]  x_exp,
  output logic [ROWS-1:0][EXP_W:0]    esum,
  output logic [ROWS-1:0]             active,
  output logic [ROWS-1:0]             psign
);

  logic [ROWS-1:0]            w_sign_q;
  logic [ROWS-1:0][EXP_W-1:0] w_exp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_sign_q <= '0;
      w_exp_q  <= '0;
    end else if (w_we) begin
      w_sign_q[w_row] <= w_sign;
      w_exp_q[w_row]  <= w_exp;
    end
  end

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      esum[i]   = {1'b0, x_exp[i]} + {1'b0, w_exp_q[i]};
      active[i] = (x_exp[i] != '0) && (w_exp_q[i] != '0);
      psign[i]  = x_sign[i] ^ w_sign_q[i];
    end
  end

endmodule
