// tb_ape_search -- self-checking test of the APE parallel CAM search.
// Fills the array with random words (with some duplicates), searches for
// stored and random keys under random masks, and compares match lines, the
// hit flag and the first-match index with a reference loop.
module tb_ape_search;
  localparam int ROWS = 64, COLS = 128;
  logic [ROWS-1:0][COLS-1:0] cells;
  logic [COLS-1:0] key, mask;
  logic [ROWS-1:0] match;
  logic any_match;
  logic [5:0] first;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ape_search #(.ROWS(ROWS), .COLS(COLS)) dut (.cells(cells), .key(key), .mask(mask),
    .match(match), .any_match(any_match), .first(first));

  function automatic logic [COLS-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    for (int r = 0; r < ROWS; r++) cells[r] = rnd();
    cells[40] = cells[7];      // duplicate: first must be 7
    for (int n = 0; n < 400; n++) begin
      logic [ROWS-1:0] em;
      logic ea;
      int ef;
      case (n % 4)
        0: begin key = cells[$urandom_range(0, ROWS-1)]; mask = '1; end
        1: begin key = cells[$urandom_range(0, ROWS-1)]; mask = rnd(); end
        2: begin key = rnd(); mask = rnd() & rnd() & rnd() & rnd(); end
        default: begin key = rnd(); mask = '0; end
      endcase
      if (n == 3) begin key = cells[40]; mask = '1; end
      #1;
      ea = 0; ef = 0;
      for (int r = ROWS - 1; r >= 0; r--) begin
        em[r] = 1;
        for (int c = 0; c < COLS; c++)
          if (mask[c] && cells[r][c] != key[c]) em[r] = 0;
        if (em[r]) begin ea = 1; ef = r; end
      end
      checks++;
      if (match !== em || any_match !== ea || (ea && first !== 6'(ef))) begin
        failures++;
        $display("FAIL n=%0d match=%h exp=%h first=%0d exp=%0d", n, match, em, first, ef);
      end
      if (n == 3) begin
        checks++;
        if (first !== 6'd7) begin failures++; $display("FAIL duplicate first=%0d", first); end
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
