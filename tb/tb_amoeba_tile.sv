// tb_amoeba_tile -- self-checking test of one Amoeba tile.
// Configures the four crossbars as APE, MPE, CPE and APE, then runs every
// instruction against results computed here: LUT hit and miss, vector ADD
// over all 64 rows (and its 1 + 9*AW command schedule), PRECODE + SHIFT
// for several rotate amounts, MVM at full and reduced ADC precision
// (saturation), AND/OR/XOR, MUL of random 16-bit operands through APE and
// MPE, an RNG word from the TRG fed by the entropy model, an operand taken
// from the neighbour port, and a refused wrong-mode instruction.
module tb_amoeba_tile;
  import amoeba_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic instr_valid, instr_ready, res_valid, res_hit, res_err, busy;
  tile_instr_t instr;
  logic [XB_COLS-1:0] nb_data, res_data;
  logic [XB_COLS-1:0][XB_SUM_W-1:0] res_sums;
  logic tbv, trb; logic [3:0] vw;
  int checks = 0, failures = 0;
  int lat;

  amoeba_tile dut (.clk(clk), .rst_n(rst_n), .instr_valid(instr_valid), .instr_ready(instr_ready),
    .instr(instr), .nb_data(nb_data), .res_valid(res_valid), .res_data(res_data), .res_sums(res_sums),
    .res_hit(res_hit), .res_err(res_err), .busy(busy),
    .trg_bit_valid(tbv), .trg_raw_bit(trb), .trg_vw(vw));
  fefet_entropy_model src (.clk(clk), .en(1'b1), .vw(vw), .bit_valid(tbv), .raw_bit(trb));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [XB_COLS-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic run(input tile_op_e op, input int xb, input int xb2, input int row, input int row2,
                     input int arg, input int k, input int prec, input logic [XB_COLS-1:0] data,
                     input bit from_tile = 0);
    @(negedge clk);
    instr = '0; instr.op = op; instr.xb = 2'(xb); instr.xb2 = 2'(xb2); instr.row = 6'(row);
    instr.row2 = 6'(row2); instr.arg = 2'(arg); instr.k = 5'(k); instr.prec = 3'(prec);
    instr.data = data; instr.from_tile = from_tile; instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(posedge clk); #1 instr_valid = 0; lat = 0;
    while (!res_valid) begin @(posedge clk); #1 lat++; end
  endtask

  logic [XB_COLS-1:0] a0 [XB_ROWS];
  logic [XB_COLS-1:0] a3 [XB_ROWS];

  initial begin
    instr_valid = 0; instr = '0; nb_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(OP_CFG, 0, 0, 0, 0, MODE_APE, 0, 0, '0);
    run(OP_CFG, 1, 0, 0, 0, MODE_MPE, 0, 0, '0);
    run(OP_CFG, 2, 0, 0, 0, MODE_CPE, 0, 0, '0);
    run(OP_CFG, 3, 0, 0, 0, MODE_APE, 0, 0, '0);
    chk(!res_err, "cfg");
    // ---- LUT in xb3: keys 1000+3r -> value r*r+7, odd rows valid ----
    for (int r = 0; r < XB_ROWS; r++) begin
      logic [XB_COLS-1:0] d;
      d = rnd(); d[KEY_LSB +: AW] = AW'(1000 + 3 * r); d[VAL_LSB +: AW] = AW'(r * r + 7); d[V_COL] = r[0];
      a3[r] = d;
      run(OP_WRITE, 3, 0, r, 0, 0, 0, 0, d);
    end
    for (int n = 0; n < 20; n++) begin
      int r; r = $urandom_range(0, XB_ROWS - 1);
      run(OP_LUT, 3, 0, 0, 0, 0, 0, 0, XB_COLS'(1000 + 3 * r));
      if (r % 2 == 1) chk(res_hit && res_data == XB_COLS'(r * r + 7), $sformatf("LUT hit r=%0d got %0d", r, res_data));
      else            chk(!res_hit && res_data == '0, $sformatf("LUT miss (invalid row) r=%0d", r));
    end
    run(OP_LUT, 3, 0, 0, 0, 0, 0, 0, XB_COLS'(5)); chk(!res_hit, "LUT miss");
    // ---- ADD in xb0 over all rows ----
    for (int r = 0; r < XB_ROWS; r++) begin
      a0[r] = rnd();
      if (r == 0) begin a0[r][A_LSB +: AW] = '1; a0[r][B_LSB +: AW] = 1; end   // full carry chain
      run(OP_WRITE, 0, 0, r, 0, 0, 0, 0, a0[r]);
    end
    run(OP_ADD, 0, 0, 0, 0, 0, 0, 0, '0);
    chk(lat == 1 + 9 * AW + 1, $sformatf("ADD latency %0d exp %0d", lat, 1 + 9 * AW + 1));
    chk(!res_err, "ADD no err");
    for (int r = 0; r < XB_ROWS; r++) begin
      logic [AW-1:0] s;
      s = a0[r][A_LSB +: AW] + a0[r][B_LSB +: AW];
      run(OP_READ, 0, 0, r, 0, 0, 0, 0, '0);
      chk(res_data[B_LSB +: AW] == s && res_data[A_LSB +: AW] == a0[r][A_LSB +: AW] &&
          res_data[XB_COLS-1:V_COL] == a0[r][XB_COLS-1:V_COL],
          $sformatf("ADD row %0d: %h exp %h", r, res_data[B_LSB +: AW], s));
    end
    // ---- SHIFT through xb1 ----
    for (int k = 1; k < AW; k += 6) begin
      logic [AW-1:0] w, e;
      run(OP_PRECODE, 1, 0, 0, 0, 0, k, 0, '0);
      chk(lat == XB_ROWS + 1, $sformatf("PRECODE latency %0d", lat));
      w = $urandom; e = (w << k) | (w >> (AW - k));
      run(OP_SHIFT, 1, 0, 0, 0, 0, 0, 0, XB_COLS'(w));
      chk(res_data == XB_COLS'(e), $sformatf("SHIFT k=%0d %h exp %h", k, res_data, e));
    end
    // ---- MVM on xb3 reconfigured as MPE (LUT contents as weights) ----
    run(OP_CFG, 3, 0, 0, 0, MODE_MPE, 0, 0, '0);
    for (int p = 0; p < 4; p += 3) begin
      logic [XB_ROWS-1:0] xv;
      int sat;
      xv = {$urandom, $urandom};
      run(OP_MVM, 3, 0, 0, 0, 0, 0, p, XB_COLS'(xv));
      sat = 0;
      for (int c = 0; c < XB_COLS; c++) begin
        int s, top;
        s = 0; for (int r = 0; r < XB_ROWS; r++) s += int'(xv[r] & a3[r][c]);
        top = (p == 0) ? 127 : (1 << p) - 1; if (s > top) begin s = top; sat++; end
        chk(int'(res_sums[c]) == s, $sformatf("MVM p=%0d col %0d: %0d exp %0d", p, c, res_sums[c], s));
      end
      if (p == 3) chk(sat > 0, "reduced precision must saturate some columns");
    end
    // ---- LOGIC on xb2 (CPE) ----
    begin
      logic [XB_COLS-1:0] u, v;
      u = rnd(); v = rnd();
      run(OP_WRITE, 2, 0, 10, 0, 0, 0, 0, u);
      run(OP_WRITE, 2, 0, 11, 0, 0, 0, 0, v);
      run(OP_LOGIC, 2, 0, 10, 11, LOGIC_AND, 0, 0, '0); chk(res_data == (u & v), "AND");
      run(OP_LOGIC, 2, 0, 10, 11, LOGIC_OR,  0, 0, '0); chk(res_data == (u | v), "OR");
      run(OP_LOGIC, 2, 0, 10, 11, LOGIC_XOR, 0, 0, '0); chk(res_data == (u ^ v), "XOR");
    end
    // ---- MUL: APE xb0 + MPE xb1 (rotate by 1) ----
    run(OP_PRECODE, 1, 0, 0, 0, 0, 1, 0, '0);
    for (int n = 0; n < 6; n++) begin
      logic [15:0] a, b;
      a = 16'($urandom); b = 16'($urandom);
      if (n == 0) begin a = 16'hffff; b = 16'hffff; end
      if (n == 1) begin a = 16'd12289; b = 16'd12288; end   // NTT modulus q
      run(OP_MUL, 0, 1, 7, 0, 0, 0, 0, XB_COLS'({b, a}));
      chk(res_data == XB_COLS'(32'(a) * 32'(b)) && !res_err,
          $sformatf("MUL %0d*%0d = %0d", a, b, res_data));
    end
    // ---- wrong mode: ADD on the MPE crossbar is refused ----
    run(OP_ADD, 1, 0, 0, 0, 0, 0, 0, '0);
    chk(res_err, "ADD on MPE must report err");
    // ---- operand from the neighbour tile ----
    nb_data = rnd();
    run(OP_WRITE, 2, 0, 20, 0, 0, 0, 0, '0, 1);
    run(OP_READ, 2, 0, 20, 0, 0, 0, 0, '0);
    chk(res_data == nb_data, "from_tile operand");
    // ---- RNG ----
    begin
      logic [XB_COLS-1:0] w1;
      run(OP_RNG, 0, 0, 0, 0, 0, 0, 0, '0); w1 = res_data;
      run(OP_RNG, 0, 0, 0, 0, 0, 0, 0, '0);
      chk(res_data[XB_COLS-1:AW] == '0 && w1 != res_data, "RNG words");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
