// tb_sha3_keccak -- SHA3 workload kernel on one Amoeba tile: the
// Keccak-f[1600] permutation (24 rounds on a 1600-bit state of 25 64-bit
// lanes), the core of SHA3, computed with tile instructions only.
//   theta, chi, iota  CPE logic on xb2. chi needs (NOT a) AND b, which is
//                     written as (a XOR b) AND b, since the CPE has AND, OR
//                     and XOR but no NOT.
//   rho, pi           64-bit lane rotations as MVM on an MPE crossbar: a
//                     64x64 permutation matrix (row r has a 1 in column
//                     (r+k) mod 64) is written row by row, and an MVM at
//                     1-bit ADC precision returns the rotated lane in the
//                     column outputs. xb3 keeps the rotate-by-1 matrix of
//                     theta; xb1 is rewritten for each rho offset.
// The lanes are held by the host between instructions. A plain software
// Keccak-f in this testbench is the reference: the state is compared after
// every round, and the result of permuting the all-zero state is also
// compared with its published first lane, 64'hF1258F7940E1DDE7.
// The round constants and rotation offsets are generated by their defining
// LFSR and recurrence, not tabulated.
module tb_sha3_keccak;
  import amoeba_pkg::*;
  localparam int NR = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic instr_valid, instr_ready, res_valid, res_hit, res_err, busy;
  tile_instr_t instr;
  logic [XB_COLS-1:0] nb_data, res_data;
  logic [XB_COLS-1:0][XB_SUM_W-1:0] res_sums;
  logic tbv, trb; logic [3:0] vw;
  int checks = 0, failures = 0;
  longint cycles = 0;

  amoeba_tile dut (.clk(clk), .rst_n(rst_n), .instr_valid(instr_valid), .instr_ready(instr_ready),
    .instr(instr), .nb_data(nb_data), .res_valid(res_valid), .res_data(res_data), .res_sums(res_sums),
    .res_hit(res_hit), .res_err(res_err), .busy(busy),
    .trg_bit_valid(tbv), .trg_raw_bit(trb), .trg_vw(vw));
  fefet_entropy_model src (.clk(clk), .en(1'b1), .vw(vw), .bit_valid(tbv), .raw_bit(trb));

  always @(posedge clk) if (rst_n) cycles++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(input tile_op_e op, input int xb, input int row, input int row2, input int arg,
                     input int prec, input logic [XB_COLS-1:0] data);
    @(negedge clk);
    instr = '0; instr.op = op; instr.xb = 2'(xb); instr.row = 6'(row); instr.row2 = 6'(row2);
    instr.arg = 2'(arg); instr.prec = 3'(prec); instr.data = data; instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(posedge clk); #1 instr_valid = 0;
    while (!res_valid) @(posedge clk);
    #1;
    if (res_err) begin failures++; $display("FAIL tile refused op %s", op.name()); end
  endtask

  // ---- tile-level lane operations ----
  task automatic t_logic(input logic_fn_e fn, input logic [63:0] a, input logic [63:0] b,
                         output logic [63:0] y);
    run(OP_WRITE, 2, 0, 0, 0, 0, XB_COLS'(a));
    run(OP_WRITE, 2, 1, 0, 0, 0, XB_COLS'(b));
    run(OP_LOGIC, 2, 0, 1, fn, 0, '0);
    y = res_data[63:0];
  endtask

  task automatic t_precode(input int xb, input int k);
    for (int r = 0; r < 64; r++) begin
      logic [XB_COLS-1:0] d;
      d = '0; d[(r + k) % 64] = 1'b1;
      run(OP_WRITE, xb, r, 0, 0, 0, d);
    end
  endtask

  task automatic t_rot(input int xb, input logic [63:0] a, output logic [63:0] y);
    run(OP_MVM, xb, 0, 0, 0, 1, XB_COLS'(a));
    for (int c = 0; c < 64; c++) y[c] = res_sums[c][0];
  endtask

  // ---- reference Keccak-f[1600] ----
  typedef logic [63:0] lanes_t [5][5];   // [x][y]
  int rho [5][5];
  logic [63:0] rc [NR];

  function automatic logic [63:0] rotl(input logic [63:0] v, input int k);
    return (k == 0) ? v : ((v << k) | (v >> (64 - k)));
  endfunction

  function automatic bit rc_bit(input int t);
    logic [7:0] r;
    if (t % 255 == 0) return 1'b1;
    r = 8'h01;
    for (int i = 1; i <= t % 255; i++) begin
      logic msb;
      msb = r[7]; r = r << 1;
      if (msb) r ^= 8'h71;
    end
    return r[0];
  endfunction

  function automatic void ref_round(ref lanes_t a, input int ir);
    logic [63:0] c [5], d [5];
    lanes_t b;
    for (int x = 0; x < 5; x++) c[x] = a[x][0] ^ a[x][1] ^ a[x][2] ^ a[x][3] ^ a[x][4];
    for (int x = 0; x < 5; x++) d[x] = c[(x + 4) % 5] ^ rotl(c[(x + 1) % 5], 1);
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) a[x][y] ^= d[x];
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) b[y][(2 * x + 3 * y) % 5] = rotl(a[x][y], rho[x][y]);
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
      a[x][y] = b[x][y] ^ (~b[(x + 1) % 5][y] & b[(x + 2) % 5][y]);
    a[0][0] ^= rc[ir];
  endfunction

  // ---- the same round on the tile ----
  task automatic tile_round(ref lanes_t a, input int ir);
    logic [63:0] c [5], d [5], t, u;
    lanes_t b;
    for (int x = 0; x < 5; x++) begin
      c[x] = a[x][0];
      for (int y = 1; y < 5; y++) t_logic(LOGIC_XOR, c[x], a[x][y], c[x]);
    end
    for (int x = 0; x < 5; x++) begin
      t_rot(3, c[(x + 1) % 5], t);
      t_logic(LOGIC_XOR, c[(x + 4) % 5], t, d[x]);
    end
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) t_logic(LOGIC_XOR, a[x][y], d[x], a[x][y]);
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) begin
      if (rho[x][y] == 0) b[y][(2 * x + 3 * y) % 5] = a[x][y];
      else begin
        t_precode(1, rho[x][y]);
        t_rot(1, a[x][y], b[y][(2 * x + 3 * y) % 5]);
      end
    end
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++) begin
      t_logic(LOGIC_XOR, b[(x + 1) % 5][y], b[(x + 2) % 5][y], t);   // ~p & q = (p ^ q) & q
      t_logic(LOGIC_AND, t, b[(x + 2) % 5][y], u);
      t_logic(LOGIC_XOR, b[x][y], u, a[x][y]);
    end
    t_logic(LOGIC_XOR, a[0][0], rc[ir], a[0][0]);
  endtask

  lanes_t st, rf;

  initial begin
    longint start;
    int x, y;
    instr_valid = 0; instr = '0; nb_data = '0;
    // rotation offsets and round constants from their definitions
    rho[0][0] = 0; x = 1; y = 0;
    for (int t = 0; t < 24; t++) begin
      int nx;
      rho[x][y] = ((t + 1) * (t + 2) / 2) % 64;
      nx = y; y = (2 * x + 3 * y) % 5; x = nx;
    end
    for (int i = 0; i < NR; i++) begin
      rc[i] = '0;
      for (int j = 0; j < 7; j++) rc[i][(1 << j) - 1] = rc_bit(j + 7 * i);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    run(OP_CFG, 1, 0, 0, MODE_MPE, 0, '0);
    run(OP_CFG, 2, 0, 0, MODE_CPE, 0, '0);
    run(OP_CFG, 3, 0, 0, MODE_MPE, 0, '0);
    t_precode(3, 1);
    for (int xx = 0; xx < 5; xx++) for (int yy = 0; yy < 5; yy++) begin st[xx][yy] = '0; rf[xx][yy] = '0; end
    start = cycles;
    for (int ir = 0; ir < NR; ir++) begin
      bit same;
      ref_round(rf, ir);
      tile_round(st, ir);
      same = 1;
      for (int xx = 0; xx < 5; xx++) for (int yy = 0; yy < 5; yy++) if (st[xx][yy] != rf[xx][yy]) same = 0;
      chk(same, $sformatf("state after round %0d", ir));
    end
    chk(rf[0][0] == 64'hF1258F7940E1DDE7, $sformatf("reference first lane %h", rf[0][0]));
    chk(st[0][0] == 64'hF1258F7940E1DDE7, $sformatf("tile first lane %h", st[0][0]));
    $display("Keccak-f[1600], %0d rounds: %0d cycles (%0d per round)", NR, cycles - start,
             (cycles - start) / NR);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
