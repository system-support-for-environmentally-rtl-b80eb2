// tb_sustain_dc_top -- end-to-end test of the whole node at its default
// parameters (four Amoeba tiles of four 64x128 crossbars, FRAC controller
// for 16 blocks).
// Amoeba part: a kernel in the spirit of the paper's workloads runs on the
// tiles. Tile 0 multiplies NTT-sized coefficients (q = 12289) with MUL
// (APE + MPE), its products go down the chain to tile 1, which adds them
// to a vector with the associative ADD. Tile 2 rotates a word with SHIFT
// and looks results up in a LUT. Tile 3 runs a binary MVM at full and at
// reduced ADC precision and the three CPE logic functions. Every tile
// reconfigures crossbars between modes, and a wrong-mode command is
// refused. The TRG of each tile is fed by a biased entropy model and must
// adjust its write voltage.
// FRAC part: one block is stepped down through 8, 7, 5, 3 and 2 Vth
// states (graceful capacity loss), and at each step it is erased, written
// and read back. Fewer states must need fewer program pulses and no more
// sensing iterations.
// Each mechanism is counted and a mechanism that never happened counts as
// a failure.
module tb_sustain_dc_top;
  import amoeba_pkg::*;
  import frac_pkg::*;
  localparam int NT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic a_valid, a_ready;
  logic [1:0] a_tile;
  tile_instr_t a_instr;
  logic [XB_COLS-1:0] a_ext;
  logic [NT-1:0] a_rv, a_hit, a_err, a_busy, tbv, trb;
  logic [NT-1:0][XB_COLS-1:0] a_rd;
  logic [NT-1:0][XB_COLS-1:0][XB_SUM_W-1:0] a_sums;
  logic [NT-1:0][3:0] vw;
  logic f_valid, f_ready, f_rv, f_err, n_ack;
  freq_op_e f_op;
  logic [3:0] f_blk, f_m, f_a;
  logic [5:0] f_grp, f_pulses;
  logic [DW-1:0] f_wd, f_rd;
  logic [2:0] f_iters;
  flash_req_t n_req;
  logic [MAX_A-1:0] n_gt;
  int checks = 0, failures = 0;

  sustain_dc_top dut (.clk(clk), .rst_n(rst_n),
    .a_instr_valid(a_valid), .a_instr_tile(a_tile), .a_instr(a_instr), .a_instr_ready(a_ready),
    .a_ext_data(a_ext), .a_res_valid(a_rv), .a_res_data(a_rd), .a_res_sums(a_sums),
    .a_res_hit(a_hit), .a_res_err(a_err), .a_busy(a_busy),
    .trg_bit_valid(tbv), .trg_raw_bit(trb), .trg_vw(vw),
    .f_req_valid(f_valid), .f_req_ready(f_ready), .f_req_op(f_op), .f_req_blk(f_blk),
    .f_req_grp(f_grp), .f_req_wdata(f_wd), .f_req_m(f_m), .f_req_alpha(f_a),
    .f_resp_valid(f_rv), .f_resp_rdata(f_rd), .f_resp_err(f_err), .f_resp_pulses(f_pulses),
    .f_resp_iters(f_iters), .nand_req(n_req), .nand_ack(n_ack), .nand_gt(n_gt));

  for (genvar t = 0; t < NT; t++) begin : g_src
    fefet_entropy_model src (.clk(clk), .en(1'b1), .vw(vw[t]), .bit_valid(tbv[t]), .raw_bit(trb[t]));
  end
  nand_flash_model #(.N_BLK(16), .N_GRP(64)) flash (.clk(clk), .req(n_req), .f_ack(n_ack), .f_gt(n_gt));

  // mechanism counters
  typedef enum int {M_MODE_SWITCH, M_LUT_HIT, M_LUT_MISS, M_ADD, M_SHIFT, M_MVM, M_MVM_SAT,
                    M_AND, M_OR, M_XOR, M_MUL, M_RNG, M_TRG_ADJ, M_WRONG_MODE, M_CHAIN,
                    M_FRAC_CFG, M_FRAC_REFUSE, M_FRAC_ERASE, M_FRAC_WRITE, M_FRAC_READ,
                    M_FEWER_PULSES, M_NUM} mech_e;
  int mech [M_NUM];
  string mname [M_NUM] = '{"mode switch", "LUT hit", "LUT miss", "ADD", "SHIFT", "MVM",
      "MVM saturation", "AND", "OR", "XOR", "MUL", "RNG", "TRG write-voltage step",
      "wrong-mode refusal", "tile chain", "FRAC config", "FRAC refused config", "FRAC erase",
      "FRAC write", "FRAC read", "fewer pulses at fewer states"};

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(input int t, input tile_op_e op, input int xb, input int xb2, input int row,
                     input int row2, input int arg, input int k, input int prec,
                     input logic [XB_COLS-1:0] data, input bit ft = 0);
    @(negedge clk);
    a_instr = '0; a_instr.op = op; a_instr.xb = 2'(xb); a_instr.xb2 = 2'(xb2);
    a_instr.row = 6'(row); a_instr.row2 = 6'(row2); a_instr.arg = 2'(arg); a_instr.k = 5'(k);
    a_instr.prec = 3'(prec); a_instr.data = data; a_instr.from_tile = ft;
    a_tile = 2'(t); a_valid = 1;
    while (!a_ready) @(negedge clk);
    @(posedge clk); #1 a_valid = 0;
    while (!a_rv[t]) @(posedge clk);
    @(negedge clk);
    if (op == OP_CFG) mech[M_MODE_SWITCH]++;
    if (ft) mech[M_CHAIN]++;
  endtask

  task automatic fop(input freq_op_e o, input int g, input longint d, input int mm, input int aa);
    @(negedge clk);
    while (!f_ready) @(negedge clk);
    f_valid = 1; f_op = o; f_blk = 4'd2; f_grp = 6'(g); f_wd = DW'(d); f_m = 4'(mm); f_a = 4'(aa);
    @(negedge clk); f_valid = 0;
    while (!f_rv) @(negedge clk);
  endtask

  function automatic logic [XB_COLS-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // TRG adjustment monitor
  logic [NT-1:0][3:0] vw_q;
  always @(posedge clk) begin
    if (rst_n && vw != vw_q) mech[M_TRG_ADJ]++;
    vw_q <= vw;
  end

  initial begin
    localparam int Q = 12289;
    logic [15:0] co [8];
    logic [15:0] tw;
    logic [31:0] prod [8], acc [8];
    a_valid = 0; a_instr = '0; a_tile = 0; a_ext = '0;
    f_valid = 0; f_op = FR_READ; f_blk = 0; f_grp = 0; f_wd = 0; f_m = 8; f_a = 1;
    for (int i = 0; i < M_NUM; i++) mech[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---------------- Amoeba ----------------
    for (int t = 0; t < NT; t++) begin
      run(t, OP_CFG, 1, 0, 0, 0, MODE_MPE, 0, 0, '0);
      run(t, OP_PRECODE, 1, 0, 0, 0, 0, 1, 0, '0);
      run(t, OP_CFG, 2, 0, 0, 0, MODE_CPE, 0, 0, '0);
    end
    // tile 0 products, tile 1 accumulates them into a vector
    tw = 16'($urandom_range(1, Q - 1));
    for (int i = 0; i < 8; i++) begin
      co[i] = 16'($urandom_range(0, Q - 1));
      acc[i] = $urandom;
      prod[i] = 32'(co[i]) * 32'(tw);
      run(0, OP_MUL, 0, 1, 0, 0, 0, 0, 0, XB_COLS'({tw, co[i]}));
      chk(a_rd[0] == XB_COLS'(prod[i]), $sformatf("MUL %0d*%0d", co[i], tw));
      mech[M_MUL]++;
      // tile 1 row i: A <- product from tile 0, then B <- acc[i]
      run(1, OP_WRITE, 0, 0, i, 0, 0, 0, 0, '0, 1);
      run(1, OP_WRITE, 0, 0, i, 0, 0, 0, 0, XB_COLS'({acc[i], prod[i]}));
    end
    run(1, OP_ADD, 0, 0, 0, 0, 0, 0, 0, '0); mech[M_ADD]++;
    for (int i = 0; i < 8; i++) begin
      run(1, OP_READ, 0, 0, i, 0, 0, 0, 0, '0);
      chk(a_rd[1][B_LSB +: AW] == prod[i] + acc[i], $sformatf("vector ADD row %0d", i));
    end
    // tile 2: rotate tile 1's last row (A field) and keep a LUT
    run(2, OP_SHIFT, 1, 0, 0, 0, 0, 0, 0, '0, 1); mech[M_SHIFT]++;
    chk(a_rd[2] == XB_COLS'({prod[7][30:0], prod[7][31]}), "SHIFT of chained word");
    for (int r = 0; r < 8; r++) begin
      logic [XB_COLS-1:0] d;
      d = '0; d[KEY_LSB +: AW] = AW'(r * 17); d[VAL_LSB +: AW] = prod[r]; d[V_COL] = 1'b1;
      run(2, OP_WRITE, 3, 0, r, 0, 0, 0, 0, d);
    end
    for (int r = 0; r < 10; r++) begin
      run(2, OP_LUT, 3, 0, 0, 0, 0, 0, 0, XB_COLS'(r * 17));
      if (r < 8) begin chk(a_hit[2] && a_rd[2] == XB_COLS'(prod[r]), "LUT hit"); mech[M_LUT_HIT]++; end
      else begin chk(!a_hit[2], "LUT miss"); mech[M_LUT_MISS]++; end
    end
    // tile 3: MVM and logic
    begin
      logic [XB_COLS-1:0] w [XB_ROWS];
      logic [XB_ROWS-1:0] xv;
      run(3, OP_CFG, 0, 0, 0, 0, MODE_MPE, 0, 0, '0);
      for (int r = 0; r < XB_ROWS; r++) begin w[r] = rnd(); run(3, OP_WRITE, 0, 0, r, 0, 0, 0, 0, w[r]); end
      xv = {$urandom, $urandom};
      for (int p = 0; p <= 4; p += 4) begin
        int sat; sat = 0;
        run(3, OP_MVM, 0, 0, 0, 0, 0, 0, p, XB_COLS'(xv)); mech[M_MVM]++;
        for (int c = 0; c < XB_COLS; c++) begin
          int s, top;
          s = 0; for (int r = 0; r < XB_ROWS; r++) s += int'(xv[r] & w[r][c]);
          top = (p == 0) ? 127 : (1 << p) - 1; if (s > top) begin s = top; sat++; end
          chk(int'(a_sums[3][c]) == s, "MVM column");
        end
        if (sat > 0) mech[M_MVM_SAT]++;
      end
      run(3, OP_CFG, 0, 0, 0, 0, MODE_CPE, 0, 0, '0);
      run(3, OP_LOGIC, 0, 0, 4, 9, LOGIC_AND, 0, 0, '0); chk(a_rd[3] == (w[4] & w[9]), "AND"); mech[M_AND]++;
      run(3, OP_LOGIC, 0, 0, 4, 9, LOGIC_OR,  0, 0, '0); chk(a_rd[3] == (w[4] | w[9]), "OR");  mech[M_OR]++;
      run(3, OP_LOGIC, 0, 0, 4, 9, LOGIC_XOR, 0, 0, '0); chk(a_rd[3] == (w[4] ^ w[9]), "XOR"); mech[M_XOR]++;
      run(3, OP_MVM, 0, 0, 0, 0, 0, 0, 0, '0);
      chk(a_err[3], "MVM on a CPE crossbar must be refused"); if (a_err[3]) mech[M_WRONG_MODE]++;
      // the cell array kept its data across reconfiguration
      run(3, OP_READ, 0, 0, 9, 0, 0, 0, 0, '0); chk(a_rd[3] == w[9], "data kept across mode switch");
    end
    for (int t = 0; t < NT; t++) begin
      run(t, OP_RNG, 0, 0, 0, 0, 0, 0, 0, '0); mech[M_RNG]++;
      chk(a_rd[t][XB_COLS-1:AW] == '0, "RNG word width");
    end

    // ---------------- FRAC ----------------
    begin
      int ms[5] = '{8, 7, 5, 3, 2};
      int as[5] = '{1, 5, 10, 7, 1};
      int prev_cap, prev_pulses;
      prev_cap = 1 << 30; prev_pulses = 1000;
      fop(FR_CFG, 0, 0, 1, 1); chk(f_err, "m=1 refused"); if (f_err) mech[M_FRAC_REFUSE]++;
      for (int s = 0; s < 5; s++) begin
        int bits, maxp;
        bits = int'(frac_bits(4'(ms[s]), 4'(as[s])));
        fop(FR_CFG, 0, 0, ms[s], as[s]); mech[M_FRAC_CFG]++;
        chk(!f_err && int'(f_rd) < prev_cap, $sformatf("capacity steps down: %0d", f_rd));
        $display("m=%0d alpha=%0d: %0d bits per group, page capacity %0d bits", ms[s], as[s], bits, f_rd);
        prev_cap = int'(f_rd);
        fop(FR_ERASE, 0, 0, 0, 0); mech[M_FRAC_ERASE]++;
        maxp = 0;
        for (int g = 0; g < 8; g++) begin
          longint d;
          d = (longint'({$urandom, $urandom}) & ((64'd1 << bits) - 1));
          if (g == 0) d = (64'd1 << bits) - 1;
          fop(FR_WRITE, g, d, 0, 0); mech[M_FRAC_WRITE]++;
          chk(!f_err, "FRAC write");
          if (int'(f_pulses) > maxp) maxp = int'(f_pulses);
          fop(FR_READ, g, 0, 0, 0); mech[M_FRAC_READ]++;
          chk(!f_err && longint'(f_rd) == d, $sformatf("FRAC m=%0d read %h exp %h", ms[s], f_rd, d));
          chk(int'(f_iters) == $clog2(ms[s]), "sensing iterations");
        end
        chk(maxp <= prev_pulses + 2, $sformatf("pulses %0d not above %0d", maxp, prev_pulses));
        if (maxp < prev_pulses && s > 0) mech[M_FEWER_PULSES]++;
        prev_pulses = maxp;
      end
    end

    for (int i = 0; i < M_NUM; i++) begin
      $display("mechanism %-30s %0d", mname[i], mech[i]);
      checks++;
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism never happened: %s", mname[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
