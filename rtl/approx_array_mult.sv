// approx_array_mult: 8x8 unsigned approximate array multiplier.
//
// A carry-save array multiplier: row 0 holds the partial products a[j]&b[0];
// each following row i adds a[j]&b[i] to the shifted sums and carries of the
// row above, and a final ripple-carry row merges the last sums and carries.
// Every adder cell that sits in a result column below APX_COLS (9, as in the
// paper) is an AMA5 cell (sum = partial-product bit, carry = incoming partial
// sum); the cells of the higher columns are exact. Positions that are half
// adders in an exact array (the second row and the first cell of the final
// row, where the carry input is 0) are kept exact. The exact array layout and
// the cell pin mapping are this design's choices: the paper gives only the
// operand width, the cell type and the number of approximate columns.
// Purely combinational: p is valid one combinational delay after a and b.
module approx_array_mult
  import sc_pkg::*;
#(
  parameter int unsigned W    = N,
  parameter int unsigned APXC = APX_COLS
) (
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-1:0] p
);
  // s[i][j], c[i][j]: sum and carry of the cell at row i, position j; the cell
  // sits in result column i+j.
  logic [W-1:0] s [W];
  logic [W-1:0] c [W];
  logic [W-1:0] fs;     // final-row sums
  logic [W:0]   fc;     // final-row ripple carries

  // Row 0: partial products only.
  for (genvar j = 0; j < W; j++) begin : g_row0
    assign s[0][j] = a[j] & b[0];
    assign c[0][j] = 1'b0;
  end

  for (genvar i = 1; i < W; i++) begin : g_row
    for (genvar j = 0; j < W; j++) begin : g_col
      logic x;
      assign x = (j + 1 < W) ? s[i-1][(j+1)%W] : 1'b0;
      mult_cell #(.APPROX((i + j < APXC) && (i != 1))) u_cell (
        .a   (x),
        .b   (a[j] & b[i]),
        .cin (c[i-1][j]),
        .sum (s[i][j]),
        .cout(c[i][j])
      );
    end
  end

  // Final ripple-carry row: column W+j adds sum s[W-1][j+1] and carry c[W-1][j].
  assign fc[0] = 1'b0;
  for (genvar j = 0; j < W; j++) begin : g_final
    logic x;
    assign x = (j + 1 < W) ? s[W-1][(j+1)%W] : 1'b0;
    mult_cell #(.APPROX((W + j < APXC) && (j != 0))) u_cell (
      .a   (x),
      .b   (c[W-1][j]),
      .cin (fc[j]),
      .sum (fs[j]),
      .cout(fc[j+1])
    );
  end

  for (genvar i = 0; i < W; i++) begin : g_low
    assign p[i] = s[i][0];
  end
  assign p[2*W-1:W] = fs;

  logic unused_carry;
  assign unused_carry = fc[W];
endmodule
