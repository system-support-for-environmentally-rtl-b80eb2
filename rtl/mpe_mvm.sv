// mpe_mvm -- matrix-vector multiply of a multiplication PE (MPE) crossbar.
//
// The MPE keeps its weights stationary: each column of the crossbar holds a
// weight vector, the input is applied to the horizontal wordlines and the
// current collected on each vertical bitline is the dot product of the input
// with that column. The ADC at the column foot turns it into a number. Cells
// and wordline inputs are one bit here (multi-bit operands are applied bit
// by bit from outside), so a column sum counts the rows where both the input
// and the cell are 1. The precision of the ADC can be lowered at run time:
// with prec=p (1..SUM_W) the sum saturates at 2^p-1; prec=0 gives full
// precision. One-bit cells, one-bit inputs and saturation are this design's
// choices. SHIFT runs on the same path: with a permutation matrix stored in
// the array, a one-bit precision output is the permuted input. Combinational.
module mpe_mvm #(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned COLS  = 128,
  parameter int unsigned SUM_W = $clog2(ROWS + 1)
) (
  input  logic [ROWS-1:0][COLS-1:0]  cells,   // weights, one bit per cell
  input  logic [ROWS-1:0]            x,       // wordline inputs
  input  logic [2:0]                 prec,    // ADC precision, 0 = full
  output logic [COLS-1:0][SUM_W-1:0] y        // quantised column sums
);
  logic [SUM_W-1:0] top;
  always_comb begin
    if (prec == 3'd0 || int'(prec) >= int'(SUM_W)) top = '1;
    else top = SUM_W'((1 << prec) - 1);
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [SUM_W-1:0] s;
    always_comb begin
      s = '0;
      for (int r = 0; r < ROWS; r++)
        s = s + SUM_W'(x[r] & cells[r][c]);
    end
    assign y[c] = (s > top) ? top : s;
  end
endmodule
