// ape_search -- parallel search of an associative PE (APE) crossbar.
//
// In APE mode each crossbar row is a CAM word built from complementary
// FeFET cells (H for '1', L for '0'). The search word is put on the vertical
// search lines as complementary voltages and every horizontal match line
// stays high only if all its cells agree with the word. This module is the
// digital function of that search: all ROWS rows are compared with key at
// once, and a column whose mask bit is 0 takes no part (both search lines
// low, a don't-care; the masking is this design's addition). match[r] is the
// match line of row r, any_match their OR and first the index of the lowest
// matching row (the priority encoder a LUT read needs). Combinational.
module ape_search #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 128
) (
  input  logic [ROWS-1:0][COLS-1:0] cells,  // stored array
  input  logic [COLS-1:0]           key,    // search word
  input  logic [COLS-1:0]           mask,   // 1 = column is searched
  output logic [ROWS-1:0]           match,  // match lines
  output logic                      any_match,
  output logic [$clog2(ROWS)-1:0]   first
);
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      match[r] = ((cells[r] ^ key) & mask) == '0;
  end

  always_comb begin
    any_match = |match;
    first     = '0;
    for (int r = ROWS - 1; r >= 0; r--)
      if (match[r]) first = r[$clog2(ROWS)-1:0];
  end
endmodule
