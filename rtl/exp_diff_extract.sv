// exp_diff_extract: exponent difference extractor. For every active row it
// forms d_i = Emax - E_i, the number of places the row's product must be
// shifted right to line up with the largest one; inactive rows get 0.
// The paper names this step and its function (E_i - Emax); the subtractors
// are the plain implementation.
// Timing: combinational.
module exp_diff_extract #(
  parameter int unsigned ROWS = hcim_pkg::ROWS,
  parameter int unsigned ES_W = hcim_pkg::EXP_W + 1
) (
  input  logic [ROWS-1:0][ES_W-1:0] esum,
  input  logic [ROWS-1:0]           active,
  input  logic [ES_W-1:0]           emax,
  output logic [ROWS-1:0][ES_W-1:0] dshift
);

  always_comb begin
    for (int i = 0; i < ROWS; i++)
      dshift[i] = active[i] ? emax - esum[i] : '0;
  end

endmodule
