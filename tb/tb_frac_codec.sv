// tb_frac_codec -- self-checking test of the FRAC data/state translation.
// Checks every entry of the two-3-state-cell truth table (encode and
// decode) and that the unused pattern is flagged; then, for the
// configurations 8/1, 2/1, 3/7, 5/10, 7/5, 6/7 and 4/3, random data
// within floor(log2(m^alpha)) bits are encoded and checked digit by digit
// against a base-m conversion done here, decoded back, and the encode and
// decode latencies (alpha cycles) are checked.
module tb_frac_codec;
  import frac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, dir, busy, done, invalid;
  logic [3:0] m, alpha;
  logic [DW-1:0] din, dout;
  st_t [MAX_A-1:0] sin, sout;
  int checks = 0, failures = 0;

  frac_codec dut (.clk(clk), .rst_n(rst_n), .start(start), .dir(dir), .m(m), .alpha(alpha),
    .din(din), .states_in(sin), .busy(busy), .done(done), .dout(dout),
    .states_out(sout), .invalid(invalid));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(input logic d, output int cyc);
    @(negedge clk); dir = d; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  // Fig. 2(b): {cell0 label, cell1 label, data}; label -> state 111:0 011:1 000:2
  logic [8:0] table_rows [8] = '{9'b111_111_111, 9'b011_111_011, 9'b000_111_001,
      9'b111_011_101, 9'b011_011_100, 9'b000_011_000, 9'b111_000_010, 9'b011_000_110};

  function automatic st_t lab2st(input logic [2:0] l);
    return (l == 3'b111) ? 3'd0 : (l == 3'b011) ? 3'd1 : 3'd2;
  endfunction

  initial begin
    int cyc;
    start = 0; dir = 0; din = '0; sin = '0; m = 3; alpha = 2;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      din = DW'(table_rows[i][2:0]);
      run(0, cyc);
      chk(sout[0] == lab2st(table_rows[i][8:6]) && sout[1] == lab2st(table_rows[i][5:3]),
          $sformatf("table enc row %0d: %0d %0d", i, sout[0], sout[1]));
      sin = '0; sin[0] = lab2st(table_rows[i][8:6]); sin[1] = lab2st(table_rows[i][5:3]);
      run(1, cyc);
      chk(dout == DW'(table_rows[i][2:0]) && !invalid, $sformatf("table dec row %0d", i));
    end
    sin = '0; sin[0] = 3'd2; sin[1] = 3'd2; run(1, cyc);
    chk(invalid, "pattern 000,000 must be invalid");

    begin
      int cfg_m[7] = '{8, 2, 3, 5, 7, 6, 4};
      int cfg_a[7] = '{1, 1, 7, 10, 5, 7, 3};
      int cfg_b[7] = '{3, 1, 11, 23, 14, 18, 6};
      for (int c = 0; c < 7; c++) begin
        m = 4'(cfg_m[c]); alpha = 4'(cfg_a[c]);
        chk(int'(frac_bits(m, alpha)) == cfg_b[c], $sformatf("bits m=%0d a=%0d", m, alpha));
        for (int n = 0; n < 30; n++) begin
          longint v, d;
          d = longint'($urandom) & ((64'd1 << cfg_b[c]) - 1);
          if (n == 0) d = (64'd1 << cfg_b[c]) - 1;
          din = DW'(d);
          run(0, cyc);
          chk(cyc == cfg_a[c] + 1, $sformatf("encode latency %0d", cyc));
          v = d;
          for (int i = 0; i < MAX_A; i++) begin
            int e;
            e = (i < cfg_a[c]) ? int'(v % cfg_m[c]) : 0;
            v = v / cfg_m[c];
            chk(int'(sout[i]) == e, $sformatf("m=%0d digit %0d = %0d exp %0d", m, i, sout[i], e));
          end
          sin = sout;
          run(1, cyc);
          chk(cyc == cfg_a[c] + 1, $sformatf("decode latency %0d", cyc));
          chk(longint'(dout) == d && !invalid, $sformatf("m=%0d roundtrip %0d -> %0d", m, d, dout));
        end
        // a pattern beyond 2^bits is reported invalid (all cells at m-1)
        if (cfg_m[c] != 8 && cfg_m[c] != 2 && cfg_m[c] != 4) begin
          for (int i = 0; i < MAX_A; i++) sin[i] = st_t'(cfg_m[c] - 1);
          run(1, cyc);
          chk(invalid, $sformatf("m=%0d overflow pattern invalid", m));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
