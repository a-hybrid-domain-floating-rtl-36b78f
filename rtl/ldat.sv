// ldat: local digital adder tree of the sub-ADD path.
//
// Each cycle j of the sub-ADD phase every row delivers a 2-bit partial sum
// {LAC, LAS} = X_i[j] + W_i[j]. The LDAT keeps one accumulator per row and
// adds the partial sum with weight 2^j, so after MANT_W cycles row i holds
// X_i + W_i exactly. The tree then forms the aligned, signed sub-ADD sum
//   sub_add = sum over active rows of (+/-) ((2^MANT_W + X_i + W_i) * 2^MANT_W) >> d_i
// i.e. (1 + x_i + w_i) * 2^-d_i for fractions x = X/2^MANT_W, w = W/2^MANT_W,
// in units of 2^-(2*MANT_W) (the units of the sub-MUL product), with the
// hidden-bit term 1 added as a constant. Alignment is exact except for the
// bits shifted out.
// The paper specifies the 2-bit per-row inputs and that they are summed by
// the local adder into the sub-ADD sum; per-row accumulation, applying the
// exponent difference and the product sign here, and the fixed-point units
// are this design's own choices.
// Interface and timing: clear (synchronous) empties the accumulators;
// step with bit_idx = j adds one cycle's partial sums at the rising edge.
// sub_add is combinational from the accumulators and the row controls.
module ldat #(
  parameter int unsigned ROWS   = hcim_pkg::ROWS,
  parameter int unsigned MANT_W = hcim_pkg::COLS,
  parameter int unsigned DSH_W  = hcim_pkg::EXP_W + 1,
  parameter int unsigned ACC_W  = hcim_pkg::ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          step,
  input  logic [$clog2(MANT_W)-1:0]     bit_idx,
  input  logic [ROWS-1:0][1:0]          row_ps,   // {LAC, LAS}
  input  logic [ROWS-1:0]               active,
  input  logic [ROWS-1:0]               psign,
  input  logic [ROWS-1:0][DSH_W-1:0]    dshift,
  output logic signed [ACC_W-1:0]       sub_add
);

  localparam int unsigned RACC_W = MANT_W + 1;         // X + W
  localparam int unsigned TERM_W = 2 * MANT_W + 2;     // (2^M + X + W) << M

  logic [ROWS-1:0][RACC_W-1:0] racc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) racc <= '0;
    else if (clear) racc <= '0;
    else if (step) begin
      for (int i = 0; i < ROWS; i++)
        racc[i] <= racc[i] + (RACC_W'({row_ps[i][1], 1'b0} + {1'b0, row_ps[i][0]}) << bit_idx);
    end
  end

  always_comb begin
    logic [TERM_W-1:0] term;
    sub_add = '0;
    for (int i = 0; i < ROWS; i++) begin
      term = (TERM_W'(1 << MANT_W) + TERM_W'(racc[i])) << MANT_W;
      term = term >> dshift[i];
      if (active[i]) begin
        if (psign[i]) sub_add = sub_add - ACC_W'(term);
        else          sub_add = sub_add + ACC_W'(term);
      end
    end
  end

endmodule
