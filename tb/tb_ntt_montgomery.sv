// tb_ntt_montgomery -- NTT workload kernel on one Amoeba tile: a batch of
// Montgomery modular multiplications with the NTT modulus q = 12289 and
// R = 2^16, the multiply at the heart of every NTT butterfly.
// For each pair (a, b), a, b < q, the tile computes
//   t = a*b                      MUL (APE xb0 + MPE xb1, rotate-by-1)
//   m = (t * q') mod R           MUL, then CPE AND with 0xFFFF on xb2
//   s = t + m*q                  MUL, then one associative ADD on xb3 for
//                                the whole batch (one pair per row)
//   u = s / R                    SHIFT: xb2 reconfigured as MPE, rotate by 16
//   u = u - q if u >= q          second batch ADD with -q, sign bit decides
// where q' = -q^-1 mod R. The result is checked against a*b*R^-1 mod q
// computed here by plain integer arithmetic. Moving the data between
// operations (taking a 16-bit field of a result into the next instruction)
// is the host's part, as in the accelerator, which has no reduction unit.
// This also exercises run-time reconfiguration of one crossbar (CPE -> MPE
// -> CPE) in the middle of a kernel.
module tb_ntt_montgomery;
  import amoeba_pkg::*;
  localparam int Q = 12289;
  localparam int NB = 16;               // products per batch
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

  task automatic run(input tile_op_e op, input int xb, input int xb2, input int row, input int row2,
                     input int arg, input int k, input logic [XB_COLS-1:0] data);
    @(negedge clk);
    instr = '0; instr.op = op; instr.xb = 2'(xb); instr.xb2 = 2'(xb2); instr.row = 6'(row);
    instr.row2 = 6'(row2); instr.arg = 2'(arg); instr.k = 5'(k); instr.data = data; instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(posedge clk); #1 instr_valid = 0;
    while (!res_valid) @(posedge clk);
    #1;
    if (res_err) begin failures++; $display("FAIL tile refused op %s", op.name()); end
  endtask

  task automatic mul(input logic [15:0] a, input logic [15:0] b, output logic [31:0] p);
    run(OP_MUL, 0, 1, 7, 0, 0, 0, XB_COLS'({b, a}));
    p = res_data[31:0];
    chk(p == 32'(a) * 32'(b), $sformatf("MUL %0d*%0d", a, b));
  endtask

  int a [NB], b [NB];
  logic [31:0] t [NB], mq [NB], u [NB];

  initial begin
    int rinv, qinv, qp;
    longint start;
    instr_valid = 0; instr = '0; nb_data = '0;
    // R^-1 mod q and q' = -q^-1 mod R
    rinv = 0; while ((rinv * 65536) % Q != 1) rinv++;
    qinv = Q; repeat (5) qinv = (qinv * (2 - Q * qinv)) & 16'hffff;
    qp = (65536 - qinv) & 16'hffff;
    for (int i = 0; i < NB; i++) begin
      a[i] = $urandom_range(0, Q - 1); b[i] = $urandom_range(0, Q - 1);
    end
    a[0] = Q - 1; b[0] = Q - 1;
    repeat (2) @(negedge clk); rst_n = 1;
    start = cycles;
    run(OP_CFG, 0, 0, 0, 0, MODE_APE, 0, '0);
    run(OP_CFG, 1, 0, 0, 0, MODE_MPE, 0, '0);
    run(OP_CFG, 2, 0, 0, 0, MODE_CPE, 0, '0);
    run(OP_CFG, 3, 0, 0, 0, MODE_APE, 0, '0);
    run(OP_PRECODE, 1, 0, 0, 0, 0, 1, '0);
    run(OP_WRITE, 2, 0, 1, 0, 0, 0, XB_COLS'(32'h0000_ffff));
    for (int i = 0; i < NB; i++) begin
      logic [31:0] p, m;
      mul(16'(a[i]), 16'(b[i]), t[i]);
      mul(t[i][15:0], 16'(qp), p);
      // m = p mod R through the CPE
      run(OP_WRITE, 2, 0, 0, 0, 0, 0, XB_COLS'(p));
      run(OP_LOGIC, 2, 0, 0, 1, LOGIC_AND, 0, '0);
      m = res_data[31:0];
      chk(m == (p & 32'hffff), "AND mask");
      mul(m[15:0], 16'(Q), mq[i]);
      // one ADD row per pair: A = t, B = m*q
      run(OP_WRITE, 3, 0, i, 0, 0, 0, XB_COLS'({mq[i], t[i]}));
    end
    // s = t + m*q for the whole batch in one associative ADD
    run(OP_ADD, 3, 0, 0, 0, 0, 0, '0);
    // u = s >> 16 through xb2 reconfigured as an MPE rotate-by-16
    run(OP_CFG, 2, 0, 0, 0, MODE_MPE, 0, '0);
    run(OP_PRECODE, 2, 0, 0, 0, 0, 16, '0);
    for (int i = 0; i < NB; i++) begin
      logic [31:0] s;
      run(OP_READ, 3, 0, i, 0, 0, 0, '0);
      s = res_data[B_LSB +: AW];
      chk(s == t[i] + mq[i] && s[15:0] == 16'h0, $sformatf("t+mq low half zero, pair %0d", i));
      run(OP_SHIFT, 2, 0, 0, 0, 0, 0, XB_COLS'(s));
      u[i] = {16'h0, res_data[15:0]};
      // conditional subtraction, again as one batch ADD: B = u - q
      run(OP_WRITE, 3, 0, i, 0, 0, 0, XB_COLS'({32'(-Q), u[i]}));
    end
    run(OP_ADD, 3, 0, 0, 0, 0, 0, '0);
    run(OP_CFG, 2, 0, 0, 0, MODE_CPE, 0, '0);
    for (int i = 0; i < NB; i++) begin
      logic [31:0] d;
      int r, exp;
      run(OP_READ, 3, 0, i, 0, 0, 0, '0);
      d = res_data[B_LSB +: AW];
      r = d[31] ? int'(u[i]) : int'(d);
      exp = int'((longint'(a[i]) * b[i] % Q) * rinv % Q);
      chk(r == exp, $sformatf("Montgomery %0d*%0d*R^-1 mod q = %0d exp %0d", a[i], b[i], r, exp));
    end
    $display("%0d Montgomery products in %0d cycles (%0d cycles each)", NB, cycles - start,
             (cycles - start) / NB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
