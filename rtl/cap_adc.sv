// cap_adc: behavioural model of the switched-capacitor charge-sharing array
// and the 3-bit flash ADC. It is an analog block and is not synthesizable;
// this model only reproduces its transfer function and clocked interface.
//
// How it works. Column bitline j (GBLB[j]) starts precharged to VDD and is
// discharged by every cell whose MUL output is 1; with ROWS cells per line
// this model takes the bitline voltage as V_j = VDD*(1 - n_j/ROWS), n_j the
// number of active cells. The bitline is sampled onto computation capacitor
// C_j (ratio 1:2:4:8 from LSB to MSB) whose column also holds a compensation
// capacitor (ratios 7:6:4:0) precharged to VDD, so every column presents
// 2^(COLS-1) unit capacitors. Closing S1 shares the charge of all columns:
//   Vo = sum_j (C_j*V_j + Ccomp_j*VDD) / sum(C) = VDD*(1 - S/(ROWS*CTOT)),
// with S = sum_j 2^j*n_j = sum_i X_i[k]*W_i, the 1-bit-by-4-bit MAC of one
// input cycle (0..60), and CTOT = COLS*2^(COLS-1) = 32 units. A flash ADC
// of 2^ADC_BITS-1 = 7 sense amplifiers compares Vo with 7 references and
// returns the 3 most significant bits of the 6-bit value of S, i.e.
// floor(S/8).
// What follows the paper: capacitor ratios, precharge to VDD, the
// charge-sharing equation, one conversion per input cycle, 3-bit flash ADC
// of 7 sense amplifiers keeping the 3 MSBs of a 6-bit range. This model's
// own choices: linear bitline discharge, ideal capacitors and sense
// amplifiers, references placed half a code below each code boundary, VDD.
// Voltages are held as integers in microvolts so that every tool can
// elaborate the model; the rounding is far below one ADC step.
// Interface and timing: when convert is high at a rising clock edge the
// array shares charge and the sense amplifiers fire; code and code_valid
// are registered and appear after that edge (one cycle of latency).
module cap_adc #(
  parameter int unsigned ROWS     = hcim_pkg::ROWS,
  parameter int unsigned COLS     = hcim_pkg::COLS,
  parameter int unsigned ADC_BITS = hcim_pkg::ADC_BITS,
  parameter int unsigned VDD_UV   = 900_000          // supply in microvolts
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [ROWS-1:0][COLS-1:0] mul_bits,    // per-cell discharge on the bitlines
  input  logic                      convert,     // S1 charge sharing + SA strobe
  output logic [ADC_BITS-1:0]       code,
  output logic                      code_valid
);

  // Largest S and the width of its full digital code (6 bits for 4x4).
  localparam int unsigned SMAX    = ROWS * ((1 << COLS) - 1);
  localparam int unsigned FS_BITS = $clog2(SMAX + 1);
  localparam int unsigned STEP    = 1 << (FS_BITS - ADC_BITS);
  localparam int unsigned CUNIT   = 1 << (COLS - 1);      // units per column
  localparam int unsigned CTOT    = COLS * CUNIT;
  localparam int unsigned NSA     = (1 << ADC_BITS) - 1;

  longint unsigned     vo;        // shared-charge output voltage (uV)
  logic [ADC_BITS-1:0] code_d;

  // Charge sharing over all columns after S1 closes.
  function automatic longint unsigned share_uv(input logic [ROWS-1:0][COLS-1:0] mb);
    longint unsigned q_tot, n, v_gblb;
    q_tot = 0;
    for (int j = 0; j < COLS; j++) begin
      n = 0;
      for (int i = 0; i < ROWS; i++) n += longint'(mb[i][j]);
      // bitline voltage of column j
      v_gblb = longint'(VDD_UV) * (longint'(ROWS) - n) / longint'(ROWS);
      // computation capacitor C_j = 2^j units, compensation = CUNIT - 2^j units
      q_tot += longint'(1 << j) * v_gblb + (longint'(CUNIT) - longint'(1 << j)) * longint'(VDD_UV);
    end
    return q_tot / longint'(CTOT);
  endfunction

  // Flash ADC: NSA sense amplifiers give a thermometer code; SA m trips when
  // Vo falls below VDD * (1 - (m*STEP - 1/2) / (ROWS*CTOT)).
  function automatic logic [ADC_BITS-1:0] flash(input longint unsigned v);
    int unsigned fired;
    longint unsigned vref;
    fired = 0;
    for (int m = 1; m <= NSA; m++) begin
      vref = longint'(VDD_UV)
           - longint'(VDD_UV) * longint'(2 * m * STEP - 1) / longint'(2 * ROWS * CTOT);
      if (v < vref) fired++;
    end
    return fired[ADC_BITS-1:0];
  endfunction

  assign vo     = share_uv(mul_bits);
  assign code_d = flash(vo);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code       <= '0;
      code_valid <= 1'b0;
    end else begin
      code_valid <= convert;
      if (convert) code <= code_d;
    end
  end

endmodule
