// emax_identifier: finds the largest exponent sum Emax among the rows that
// take part in the dot product (rows flushed to zero are ignored; with no
// active row Emax is 0).
// The paper names this block and its function; the circuit, a chain of
// compare-and-select stages, is the simplest one that does it.
// Timing: combinational.
module emax_identifier #(
  parameter int unsigned ROWS = hcim_pkg::ROWS,
  parameter int unsigned ES_W = hcim_pkg::EXP_W + 1
) (
  input  logic [ROWS-1:0][ES_W-1:0] esum,
  input  logic [ROWS-1:0]           active,
  output logic [ES_W-1:0]           emax
);

  always_comb begin
    emax = '0;
    for (int i = 0; i < ROWS; i++)
      if (active[i] && esum[i] > emax) emax = esum[i];
  end

endmodule
