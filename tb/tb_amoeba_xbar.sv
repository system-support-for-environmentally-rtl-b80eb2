// tb_amoeba_xbar -- self-checking test of one reconfigurable crossbar.
// Keeps a reference copy of the array. Checks masked row writes and reads,
// APE search with associative write into all matching rows, MPE column
// sums, CPE two-row logic, mode switching between the three engines, the
// refusal (err) of a command issued in the wrong mode, and the one-cycle
// result latency.
module tb_amoeba_xbar;
  import amoeba_pkg::*;
  localparam int R = 64, C = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  xb_cmd_e cmd; pe_mode_e mode_in, mode; logic_fn_e fn;
  logic [5:0] row, row2, first;
  logic [C-1:0] key, wdata, wmask, smask, rdata;
  logic [R-1:0] x, match;
  logic [2:0] prec;
  logic hit, err;
  logic [C-1:0][6:0] y;
  logic [C-1:0] ref_a [R];
  int checks = 0, failures = 0;

  amoeba_xbar dut (.clk(clk), .rst_n(rst_n), .cmd(cmd), .mode_in(mode_in), .row(row), .row2(row2),
    .key(key), .wdata(wdata), .wmask(wmask), .smask(smask), .x(x), .prec(prec), .fn(fn),
    .mode(mode), .rdata(rdata), .match(match), .hit(hit), .first(first), .y(y), .err(err));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [C-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // issue one command, results are checked after the next edge
  task automatic issue(input xb_cmd_e c);
    cmd = c; @(negedge clk); cmd = XB_NOP;
  endtask

  initial begin
    cmd = XB_NOP; mode_in = MODE_APE; fn = LOGIC_AND; row = 0; row2 = 0; key = 0;
    wdata = 0; wmask = 0; smask = 0; x = 0; prec = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(mode == MODE_APE, "reset mode APE");
    for (int r = 0; r < R; r++) begin
      row = 6'(r); wdata = rnd(); wmask = '1; ref_a[r] = wdata; issue(XB_WRITE);
    end
    // masked write and read
    for (int n = 0; n < 20; n++) begin
      row = 6'($urandom); wdata = rnd(); wmask = rnd();
      ref_a[row] = (ref_a[row] & ~wmask) | (wdata & wmask);
      issue(XB_WRITE);
      issue(XB_READ);
      chk(rdata == ref_a[row], "masked write/read");
    end
    // APE: tag rows whose low byte is 8'h5a, write their top byte
    for (int r = 0; r < R; r += 3) begin
      ref_a[r][7:0] = 8'h5a; row = 6'(r); wdata = ref_a[r]; wmask = '1; issue(XB_WRITE);
    end
    key = '0; key[7:0] = 8'h5a; smask = '0; smask[7:0] = 8'hff;
    wdata = '0; wdata[127:120] = 8'hc3; wmask = '0; wmask[127:120] = 8'hff;
    issue(XB_SEARCH);
    begin
      logic [R-1:0] em; em = '0;
      for (int r = 0; r < R; r++) if (ref_a[r][7:0] == 8'h5a) begin em[r] = 1; ref_a[r][127:120] = 8'hc3; end
      chk(match == em && hit && first == 6'd0, $sformatf("search match %h exp %h", match, em));
    end
    for (int r = 0; r < R; r++) begin row = 6'(r); issue(XB_READ); chk(rdata == ref_a[r], "assoc write"); end
    // wrong mode: MVM in APE mode is refused
    issue(XB_MVM); chk(err, "MVM in APE mode must raise err");
    // MPE
    mode_in = MODE_MPE; issue(XB_CFG); chk(mode == MODE_MPE, "cfg MPE");
    issue(XB_SEARCH); chk(err, "SEARCH in MPE mode must raise err");
    for (int n = 0; n < 5; n++) begin
      x = {$urandom, $urandom}; prec = 3'(n); issue(XB_MVM);
      for (int c = 0; c < C; c++) begin
        int s, top;
        s = 0; for (int r = 0; r < R; r++) s += int'(x[r] & ref_a[r][c]);
        top = (prec == 0) ? 127 : (1 << prec) - 1; if (s > top) s = top;
        chk(int'(y[c]) == s, "mvm column");
      end
      chk(!err, "no err in MPE");
    end
    // CPE
    mode_in = MODE_CPE; issue(XB_CFG);
    for (int n = 0; n < 12; n++) begin
      logic [C-1:0] e;
      row = 6'($urandom); row2 = 6'($urandom); fn = logic_fn_e'(n % 3); issue(XB_LOGIC);
      e = (fn == LOGIC_AND) ? ref_a[row] & ref_a[row2] : (fn == LOGIC_OR) ? ref_a[row] | ref_a[row2]
                                                                         : ref_a[row] ^ ref_a[row2];
      chk(rdata == e && !err, "cpe logic");
    end
    // the cells keep their data across a controller reset (nonvolatile)
    rst_n = 0; @(negedge clk); rst_n = 1;
    chk(mode == MODE_APE, "mode resets");
    row = 6'd5; issue(XB_READ); chk(rdata == ref_a[5], "array survives reset");
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
