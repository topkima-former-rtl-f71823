// kt_weight_encoder: maps one row of 4-bit K^T weights onto ternary cells.
//
// Each weight is sign-magnitude: bit 3 is the sign, bits 2:0 the magnitude.
// Magnitude bit j drives the cell whose word-line pulse is 2^j times the
// input width, and that cell stores +1 or -1 (by the sign) when the bit is
// set and 0 otherwise. The sum of cell values times pulse scales is then the
// weight, giving the 15 levels -7..+7. The cell state codes are those of the
// paper's dual 10T cell table; treating negative zero as 0 is this design's
// choice.
//
// Interface: purely combinational, w[c] in, cells[j][c] out (j = 0,1,2 for
// scales 1,2,4).
module kt_weight_encoder
  import topkima_pkg::*;
#(
  parameter int COLS = 256
) (
  input  logic  [COLS-1:0][W_BITS-1:0]          w,
  output cell_t [CELLS_PER_WEIGHT-1:0][COLS-1:0] cells
);

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      for (int j = 0; j < CELLS_PER_WEIGHT; j++) begin
        if (!w[c][j])             cells[j][c] = CELL_ZERO;
        else if (w[c][W_BITS-1])  cells[j][c] = CELL_NEG;
        else                      cells[j][c] = CELL_POS;
      end
    end
  end

endmodule
