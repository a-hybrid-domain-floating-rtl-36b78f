// shift_add: shift-and-add accumulator of the analog sub-MUL path.
//
// For input cycle k the flash ADC returns a code D_k, the ADC_BITS most
// significant bits of the FS_BITS-bit value of sum_i X_i[k]*W_i. The block
// restores the code's weight (2^(FS_BITS-ADC_BITS)) and the weight of the
// input bit (2^k) and adds the result to a signed accumulator, subtracting
// it during the pass over rows with negative products:
//   sub_mul += (+/-) D_k << (k + FS_BITS - ADC_BITS)
// After all input bits the accumulator approximates sum_i x_al,i * W_i in
// units of 2^-(2*MANT_W); the truncation of the ADC is the only error.
// The paper names this block and its place between the ADC and PM; the
// weighting and the sign handling are this design's reading of it.
// Interface and timing: clear (synchronous) zeroes the sum; when step is
// high at a rising edge, code is added with weight bit_idx and sign neg.
module shift_add #(
  parameter int unsigned MANT_W   = hcim_pkg::COLS,
  parameter int unsigned ADC_BITS = hcim_pkg::ADC_BITS,
  parameter int unsigned FS_BITS  = 6,
  parameter int unsigned ACC_W    = hcim_pkg::ACC_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      step,
  input  logic [$clog2(MANT_W)-1:0] bit_idx,
  input  logic                      neg,
  input  logic [ADC_BITS-1:0]       code,
  output logic signed [ACC_W-1:0]   sub_mul
);

  logic signed [ACC_W-1:0] term;

  assign term = ACC_W'({{(ACC_W-ADC_BITS){1'b0}}, code} << (32'(bit_idx) + (FS_BITS - ADC_BITS)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sub_mul <= '0;
    else if (clear) sub_mul <= '0;
    else if (step) sub_mul <= neg ? sub_mul - term : sub_mul + term;
  end

endmodule
