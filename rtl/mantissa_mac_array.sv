// mantissa_mac_array: the 4x4 hybrid-domain CIM mantissa array.
//
// Row i holds the weight mantissa W_M,i, one bit per column; column j holds
// bit j (weight 2^j), the column that feeds capacitor C_j. Every row has
// one activation input line X_i, driven bit-serially.
//   * sub-ADD (digital): in cycle j the caller selects column j (add_col
//     one-hot). In every row the selected cell's half adder forms the 2-bit
//     partial sum {LAC, LAS} = X_i[j] + W_i[j], which leaves the row on
//     row_ps[i] towards the local digital adder tree.
//   * sub-MUL (analog): with mul_en high every cell drives X_i AND W_i[j]
//     onto its column line; mul_bits[i][j] are those per-cell contributions
//     that the switched-capacitor array sums along each column bitline.
// A plain write port (one row per cycle) and a read port load and inspect
// the weights. The 4x4 size, the row/column organisation and the two uses
// of each cell follow the paper; the column numbering (column j = bit j)
// follows the capacitor labels of the paper's figure, and the ports that
// select columns and phases are this design's own.
// Timing: writes take effect at the next rising edge; all compute outputs
// and rd_data are combinational.
module mantissa_mac_array #(
  parameter int unsigned ROWS = hcim_pkg::ROWS,
  parameter int unsigned COLS = hcim_pkg::COLS
) (
  input  logic                           clk,
  input  logic                           w_we,
  input  logic [$clog2(ROWS)-1:0]        w_row,
  input  logic [COLS-1:0]                w_data,
  input  logic [$clog2(ROWS)-1:0]        rd_row,
  output logic [COLS-1:0]                rd_data,
  input  logic [ROWS-1:0]                x_bits,    // one activation bit per row
  input  logic [COLS-1:0]                add_col,   // one-hot column select (sub-ADD)
  input  logic                           mul_en,    // sub-MUL phase
  output logic [ROWS-1:0][1:0]           row_ps,    // {LAC, LAS} per row
  output logic [ROWS-1:0][COLS-1:0]      mul_bits   // per-cell MUL contributions
);

  logic [ROWS-1:0][COLS-1:0] q, las, lac;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      sram_lcc_cell u_cell (
        .clk    (clk),
        .wl     (w_we && (w_row == r[$clog2(ROWS)-1:0])),
        .bl     (w_data[c]),
        .x_m    (x_bits[r]),
        .sel    (add_col[c]),
        .mul_en (mul_en),
        .q      (q[r][c]),
        .las    (las[r][c]),
        .lac    (lac[r][c]),
        .mul    (mul_bits[r][c])
      );
    end
    // Row LAS and LAC lines: only the selected cell drives them.
    assign row_ps[r] = {|lac[r], |las[r]};
  end

  assign rd_data = q[rd_row];

  // At most one column may drive the row LAS/LAC lines, and the sub-ADD and
  // sub-MUL uses of the AND gate never overlap.
  always_ff @(posedge clk) begin
    a_one_col: assert ((add_col & (add_col - 1'b1)) == '0)
      else $error("add_col must select at most one column");
    a_no_overlap: assert (!(mul_en && (add_col != '0)))
      else $error("sub-ADD and sub-MUL selected together");
  end

endmodule
