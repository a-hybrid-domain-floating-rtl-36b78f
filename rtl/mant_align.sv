// mant_align: mantissa alignment. Shifts each row's activation fraction
// right by its exponent difference d_i, dropping the bits shifted out
// (a shift of MANT_W or more gives 0). The aligned fractions are the
// bit-serial inputs of the analog sub-MUL.
// The paper names this step and draws the shift on the activation
// mantissa; which term it feeds (sub-MUL only, the sub-ADD term being
// aligned in the adder tree) is this design's own choice.
// Timing: combinational.
module mant_align #(
  parameter int unsigned ROWS   = hcim_pkg::ROWS,
  parameter int unsigned MANT_W = hcim_pkg::COLS,
  parameter int unsigned DSH_W  = hcim_pkg::EXP_W + 1
) (
  input  logic [ROWS-1:0][MANT_W-1:0] x_frac,
  input  logic [ROWS-1:0][DSH_W-1:0]  dshift,
  output logic [ROWS-1:0][MANT_W-1:0] x_al
);

  always_comb begin
    for (int i = 0; i < ROWS; i++)
      x_al[i] = x_frac[i] >> dshift[i];
  end

endmodule
