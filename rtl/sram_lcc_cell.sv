// sram_lcc_cell: one 6T SRAM bit cell with its hybrid-domain local
// computing cell (LCC).
//
// The cell stores one weight-mantissa bit Q, written through the word line
// (wl) from the bit line (bl) on a rising clock edge. Two pseudo logic gates
// sit beside the storage node and both see the activation bit X_M (its
// complement X_MB is implied):
//   * the pseudo XOR gives LAS = X_M xor Q (sum of a half adder),
//   * the pseudo AND gives X_M and Q. It is time-multiplexed: during the
//     digital sub-ADD phase it drives the row carry line LAC, during the
//     analog sub-MUL phase it drives the column MUL line.
// The half-adder function, the reuse of the AND gate and the LAS/LAC/MUL
// names follow the paper's cell schematics. The two enables that pick
// which line the gates drive (sel for the row lines, mul_en for the MUL
// line) are this design's own digital abstraction of that multiplexing;
// an output not driven reads 0 (the discharged VSS level).
// Timing: outputs are combinational from x_m, sel, mul_en and the stored Q.
// The storage has no reset, like an SRAM cell.
module sram_lcc_cell (
  input  logic clk,
  input  logic wl,      // word line: write enable
  input  logic bl,      // bit line: write data
  input  logic x_m,     // activation mantissa bit on the row input line
  input  logic sel,     // column selected for sub-ADD in this cycle
  input  logic mul_en,  // sub-MUL phase: AND output goes to the MUL line
  output logic q,       // stored weight bit
  output logic las,     // local sum (pseudo XOR)
  output logic lac,     // local carry (pseudo AND, sub-ADD use)
  output logic mul      // product bit (pseudo AND, sub-MUL use)
);

  logic and_out;

  always_ff @(posedge clk) begin
    if (wl) q <= bl;
  end

  assign and_out = x_m & q;
  assign las     = sel & (x_m ^ q);
  assign lac     = sel & and_out;
  assign mul     = mul_en & and_out;

endmodule
