// pm: final merge of the mantissa MAC result.
//
// PM adds the digital sub-ADD sum from the local digital adder tree and the
// analog sub-MUL sum from shift-and-add, which by the decomposition
// 1.X*1.W = (1 + X + W) + X*W gives the aligned sum of mantissa products,
// and registers it together with the common exponent Emax. The value of
// the result is
//   result * 2^(emax - 2*BIAS - 2*MANT_W)
// The paper only names this block and draws its two inputs; the adder,
// the register and the output format are this design's own.
// Interface and timing: when en is high at a rising edge result and
// res_emax are loaded and valid pulses high for the following cycle.
module pm #(
  parameter int unsigned ACC_W = hcim_pkg::ACC_W,
  parameter int unsigned EMX_W = hcim_pkg::EXP_W + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic signed [ACC_W-1:0]  sub_add,
  input  logic signed [ACC_W-1:0]  sub_mul,
  input  logic [EMX_W-1:0]         emax,
  output logic signed [ACC_W-1:0]  result,
  output logic [EMX_W-1:0]         res_emax,
  output logic                     valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result   <= '0;
      res_emax <= '0;
      valid    <= 1'b0;
    end else begin
      valid <= en;
      if (en) begin
        result   <= sub_add + sub_mul;
        res_emax <= emax;
      end
    end
  end

endmodule
