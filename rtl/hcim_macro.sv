// hcim_macro: hybrid-domain floating-point compute-in-memory macro (top).
//
// The macro stores ROWS FP8 (E4M3) weights and computes the dot product of
// them with a vector of ROWS FP8 activations. Exponents are handled in a
// digital exponent unit (sum, Emax, differences, activation alignment).
// Mantissa products 1.X*1.W are split into
//   sub-ADD  1 + X + W   computed digitally: a half adder in every SRAM
//                        cell, one column per cycle, summed by the local
//                        digital adder tree (LDAT), exact;
//   sub-MUL  X * W       computed in the analog domain: the AND gate of
//                        every cell discharges its column bitline, a
//                        switched-capacitor array merges the four columns
//                        with 1:2:4:8 weights and a 3-bit flash ADC
//                        converts once per input bit; shift-and-add
//                        accumulates the codes.
// PM adds both parts. Because sub-MUL is at most a quarter of a mantissa
// product, its coarse conversion costs little accuracy.
//
// Sequencing (this design's own; the paper gives no controller):
//   PH_EXP     1 cycle   exponent unit result registered
//   PH_ADD     COLS cyc. column j selected, activation bit X_i[j] on row i
//   PH_MUL_POS COLS cyc. aligned activation bits, rows with positive product
//   PH_MUL_NEG COLS cyc. the same for rows with negative product
//   PH_DRAIN   1 cycle   last ADC code is accumulated
//   PH_MERGE   1 cycle   PM adds sub-ADD and sub-MUL
// A sub-MUL pass with no rows of its sign is skipped. The analog array
// sums all rows on a bitline, so rows of opposite product sign cannot share
// a conversion; the two passes are how this design handles signs.
// Weight fractions (FRAC_W = 3 bits) are stored in the upper columns of the
// COLS = 4 bit row, the lowest column holds 0.
//
// Interface: write weights with w_we/w_row/w_data (one per cycle, any
// time the macro is idle). Pulse start with x_vec valid for that cycle;
// busy is high until done, which pulses for one cycle with result and
// res_emax valid (they hold until the next operation). The dot product is
//   result * 2^(res_emax - 2*BIAS - 2*COLS).
// Latency from the start edge to done: 3 + COLS*(1 + passes) cycles,
// passes = number of non-empty sub-MUL passes (0, 1 or 2).
module hcim_macro #(
  parameter int unsigned ROWS     = hcim_pkg::ROWS,
  parameter int unsigned COLS     = hcim_pkg::COLS,
  parameter int unsigned ADC_BITS = hcim_pkg::ADC_BITS,
  parameter int unsigned ACC_W    = hcim_pkg::ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight write port
  input  logic                          w_we,
  input  logic [$clog2(ROWS)-1:0]       w_row,
  input  hcim_pkg::fp8_t                w_data,
  // weight mantissa read-back
  input  logic [$clog2(ROWS)-1:0]       rd_row,
  output logic [COLS-1:0]               rd_mant,
  // operation
  input  logic                          start,
  input  hcim_pkg::fp8_t [ROWS-1:0]     x_vec,
  output logic                          busy,
  output logic                          done,
  output logic signed [ACC_W-1:0]       result,
  output logic [hcim_pkg::EXP_W:0]      res_emax
);

  import hcim_pkg::*;

  localparam int unsigned SMAX    = ROWS * ((1 << COLS) - 1);
  localparam int unsigned FS_BITS = $clog2(SMAX + 1);
  localparam int unsigned IDX_W   = $clog2(COLS);
  localparam int unsigned PAD_W   = COLS - FRAC_W;

  phase_t              phase;
  logic [IDX_W-1:0]    cnt;

  // exponent unit
  logic [ROWS-1:0]              x_sign;
  logic [ROWS-1:0][EXP_W-1:0]   x_exp;
  logic [ROWS-1:0][COLS-1:0]    x_frac;
  logic [ROWS-1:0]              active, psign;
  logic [ROWS-1:0][EXP_W:0]     dshift;
  logic [EXP_W:0]               emax;
  logic [ROWS-1:0][COLS-1:0]    x_frac_q, x_al;
  logic                         exp_load;

  // mantissa array
  logic [ROWS-1:0]              x_bits;
  logic [COLS-1:0]              add_col;
  logic                         mul_en;
  logic [ROWS-1:0][1:0]         row_ps;
  logic [ROWS-1:0][COLS-1:0]    mul_bits;

  // analog back end
  logic                         convert;
  logic [ADC_BITS-1:0]          code;
  logic                         code_valid;
  logic [IDX_W-1:0]             conv_idx;
  logic                         conv_neg;

  logic                         acc_clear, add_step, pm_en;
  logic signed [ACC_W-1:0]      sub_add, sub_mul;

  logic [ROWS-1:0]              pos_rows, neg_rows;

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      x_sign[i] = x_vec[i].sign;
      x_exp[i]  = x_vec[i].exp;
      x_frac[i] = {x_vec[i].frac, {PAD_W{1'b0}}};
    end
  end

  assign pos_rows = active & ~psign;
  assign neg_rows = active & psign;

  // ---------------------------------------------------------------- sequencer
  logic last_bit;
  assign last_bit = (cnt == IDX_W'(COLS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE;
      cnt   <= '0;
    end else begin
      unique case (phase)
        PH_IDLE:  if (start) phase <= PH_EXP;
        PH_EXP:   begin phase <= PH_ADD; cnt <= '0; end
        PH_ADD:   if (last_bit) begin
                    cnt <= '0;
                    if (pos_rows != '0)      phase <= PH_MUL_POS;
                    else if (neg_rows != '0) phase <= PH_MUL_NEG;
                    else                     phase <= PH_DRAIN;
                  end else cnt <= cnt + 1'b1;
        PH_MUL_POS: if (last_bit) begin
                    cnt   <= '0;
                    phase <= (neg_rows != '0) ? PH_MUL_NEG : PH_DRAIN;
                  end else cnt <= cnt + 1'b1;
        PH_MUL_NEG: if (last_bit) begin
                    cnt   <= '0;
                    phase <= PH_DRAIN;
                  end else cnt <= cnt + 1'b1;
        PH_DRAIN: phase <= PH_MERGE;
        PH_MERGE: phase <= PH_IDLE;
        default:  phase <= PH_IDLE;
      endcase
    end
  end

  always_comb begin
    exp_load  = (phase == PH_IDLE) && start;
    acc_clear = exp_load;
    add_step  = (phase == PH_ADD);
    mul_en    = (phase == PH_MUL_POS) || (phase == PH_MUL_NEG);
    convert   = mul_en;
    pm_en     = (phase == PH_MERGE);
    add_col   = '0;
    x_bits    = '0;
    if (phase == PH_ADD) begin
      add_col[cnt] = 1'b1;
      for (int i = 0; i < ROWS; i++) x_bits[i] = active[i] & x_frac_q[i][cnt];
    end else if (phase == PH_MUL_POS) begin
      for (int i = 0; i < ROWS; i++) x_bits[i] = pos_rows[i] & x_al[i][cnt];
    end else if (phase == PH_MUL_NEG) begin
      for (int i = 0; i < ROWS; i++) x_bits[i] = neg_rows[i] & x_al[i][cnt];
    end
  end

  // bit index and sign of the conversion in flight (ADC has one cycle latency)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      conv_idx <= '0;
      conv_neg <= 1'b0;
    end else if (convert) begin
      conv_idx <= cnt;
      conv_neg <= (phase == PH_MUL_NEG);
    end
  end

  assign busy = (phase != PH_IDLE);

  // ---------------------------------------------------------------- blocks
  exponent_unit #(.ROWS(ROWS), .EXP_W(EXP_W), .MANT_W(COLS)) u_exp (
    .clk, .rst_n,
    .w_we, .w_row, .w_sign(w_data.sign), .w_exp(w_data.exp),
    .load(exp_load), .x_sign, .x_exp, .x_frac,
    .active, .psign, .esum(), .emax, .dshift, .x_frac_q, .x_al
  );

  mantissa_mac_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk,
    .w_we, .w_row, .w_data({w_data.frac, {PAD_W{1'b0}}}),
    .rd_row, .rd_data(rd_mant),
    .x_bits, .add_col, .mul_en, .row_ps, .mul_bits
  );

  cap_adc #(.ROWS(ROWS), .COLS(COLS), .ADC_BITS(ADC_BITS)) u_adc (
    .clk, .rst_n, .mul_bits, .convert, .code, .code_valid
  );

  ldat #(.ROWS(ROWS), .MANT_W(COLS), .DSH_W(EXP_W + 1), .ACC_W(ACC_W)) u_ldat (
    .clk, .rst_n, .clear(acc_clear), .step(add_step), .bit_idx(cnt),
    .row_ps, .active, .psign, .dshift, .sub_add
  );

  shift_add #(.MANT_W(COLS), .ADC_BITS(ADC_BITS), .FS_BITS(FS_BITS), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n, .clear(acc_clear), .step(code_valid), .bit_idx(conv_idx),
    .neg(conv_neg), .code, .sub_mul
  );

  pm #(.ACC_W(ACC_W), .EMX_W(EXP_W + 1)) u_pm (
    .clk, .rst_n, .en(pm_en), .sub_add, .sub_mul, .emax,
    .result, .res_emax, .valid(done)
  );

  // start is only accepted while idle
  always_ff @(posedge clk) begin
    a_no_start_when_busy: assert (!(busy && start))
      else $error("start while busy is ignored");
  end

endmodule
