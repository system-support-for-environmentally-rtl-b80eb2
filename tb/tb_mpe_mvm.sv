// tb_mpe_mvm -- self-checking test of the MPE matrix-vector multiply.
// Random binary weights and inputs at every ADC precision are compared
// with a reference dot product; a rotate-by-k permutation matrix checks
// that SHIFT done as an MVM gives the rotated word.
module tb_mpe_mvm;
  localparam int ROWS = 64, COLS = 128, SW = 7;
  logic [ROWS-1:0][COLS-1:0] cells;
  logic [ROWS-1:0] x;
  logic [2:0] prec;
  logic [COLS-1:0][SW-1:0] y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  mpe_mvm #(.ROWS(ROWS), .COLS(COLS)) dut (.cells(cells), .x(x), .prec(prec), .y(y));

  initial begin
    for (int n = 0; n < 60; n++) begin
      for (int r = 0; r < ROWS; r++) cells[r] = {$urandom, $urandom, $urandom, $urandom};
      x = {$urandom, $urandom};
      if (n == 0) begin cells = '1; x = '1; end         // full column: sum 64
      prec = 3'(n % 8);
      #1;
      for (int c = 0; c < COLS; c++) begin
        int s, top;
        s = 0;
        for (int r = 0; r < ROWS; r++) s += int'(x[r] & cells[r][c]);
        top = (prec == 0 || prec >= 7) ? 127 : (1 << prec) - 1;
        if (s > top) s = top;
        checks++;
        if (int'(y[c]) != s) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d c=%0d y=%0d exp=%0d", n, c, y[c], s);
        end
      end
    end
    // SHIFT: rotate-left by k of a 32-bit word through a permutation matrix
    for (int k = 0; k < 32; k += 5) begin
      logic [31:0] w, exp;
      cells = '0;
      for (int r = 0; r < 32; r++) cells[r][(r + k) % 32] = 1'b1;
      w = $urandom; x = '0; x[31:0] = w; prec = 3'd1; #1;
      exp = (w << k) | (w >> ((32 - k) % 32));
      if (k == 0) exp = w;
      for (int c = 0; c < 32; c++) begin
        checks++;
        if (y[c] !== SW'(exp[c])) begin
          failures++;
          $display("FAIL shift k=%0d c=%0d", k, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
