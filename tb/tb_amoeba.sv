// tb_amoeba -- self-checking test of the four-tile Amoeba array.
// Checks instruction routing by tile index, that tiles run at the same
// time (a second tile accepts work while the first is busy with an ADD),
// and the result chain: a product computed by tile 0 is written into tile
// 1 as a "from tile" operand, tile 1's sum feeds tile 2, and tile 2's
// rotated word feeds tile 3. Each TRG gets its own entropy model.
module tb_amoeba;
  import amoeba_pkg::*;
  localparam int NT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic instr_valid, instr_ready;
  logic [1:0] instr_tile;
  tile_instr_t instr;
  logic [XB_COLS-1:0] ext_data;
  logic [NT-1:0] res_valid, res_hit, res_err, busy, tbv, trb;
  logic [NT-1:0][XB_COLS-1:0] res_data;
  logic [NT-1:0][XB_COLS-1:0][XB_SUM_W-1:0] res_sums;
  logic [NT-1:0][3:0] vw;
  int checks = 0, failures = 0;

  amoeba dut (.clk(clk), .rst_n(rst_n), .instr_valid(instr_valid), .instr_tile(instr_tile),
    .instr(instr), .instr_ready(instr_ready), .ext_data(ext_data), .res_valid(res_valid),
    .res_data(res_data), .res_sums(res_sums), .res_hit(res_hit), .res_err(res_err), .busy(busy),
    .trg_bit_valid(tbv), .trg_raw_bit(trb), .trg_vw(vw));
  for (genvar t = 0; t < NT; t++) begin : g_src
    fefet_entropy_model src (.clk(clk), .en(1'b1), .vw(vw[t]), .bit_valid(tbv[t]), .raw_bit(trb[t]));
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send(input int t, input tile_op_e op, input int xb, input int xb2, input int row,
                      input int arg, input int k, input logic [XB_COLS-1:0] data, input bit ft = 0);
    @(negedge clk);
    instr = '0; instr.op = op; instr.xb = 2'(xb); instr.xb2 = 2'(xb2); instr.row = 6'(row);
    instr.arg = 2'(arg); instr.k = 5'(k); instr.data = data; instr.from_tile = ft;
    instr_tile = 2'(t); instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(posedge clk); #1 instr_valid = 0;
  endtask

  task automatic wait_res(input int t);
    while (!res_valid[t]) @(posedge clk);
    @(negedge clk);
  endtask

  initial begin
    logic [15:0] a, b;
    logic [31:0] p, q, s, rot;
    instr_valid = 0; instr = '0; instr_tile = 0; ext_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      send(t, OP_CFG, 1, 0, 0, MODE_MPE, 0, '0); wait_res(t);
      send(t, OP_PRECODE, 1, 0, 0, 0, 1, '0); wait_res(t);
    end
    a = 16'($urandom); b = 16'($urandom); p = 32'(a) * 32'(b);
    q = $urandom;
    // tile 0: MUL
    send(0, OP_MUL, 0, 1, 0, 0, 0, XB_COLS'({b, a}));
    // while tile 0 is busy, tile 1 gets its addend row (A = q)
    send(1, OP_WRITE, 0, 0, 3, 0, 0, XB_COLS'(q));
    chk(busy[0], "tile 0 still busy while tile 1 takes work");
    wait_res(1);
    wait_res(0);
    chk(res_data[0] == XB_COLS'(p), "tile 0 product");
    // tile 1: B field of row 3 <- tile 0 product (from tile), then ADD
    send(1, OP_WRITE, 0, 0, 3, 0, 0, '0, 1); wait_res(1);
    send(1, OP_READ, 0, 0, 3, 0, 0, '0); wait_res(1);
    begin
      // the whole row was overwritten by tile 0's result: A = p, B = 0
      chk(res_data[1] == XB_COLS'(p), "row from tile 0");
    end
    send(1, OP_WRITE, 0, 0, 3, 0, 0, XB_COLS'({q, p})); wait_res(1);   // A = p, B = q
    send(1, OP_ADD, 0, 0, 0, 0, 0, '0); wait_res(1);
    send(1, OP_READ, 0, 0, 3, 0, 0, '0); wait_res(1);
    s = p + q;
    chk(res_data[1][B_LSB +: AW] == s, "tile 1 sum");
    // tile 2: SHIFT of tile 1's row, B field not used: rotate A field
    send(2, OP_SHIFT, 1, 0, 0, 0, 0, '0, 1); wait_res(2);
    rot = {p[30:0], p[31]};
    chk(res_data[2] == XB_COLS'(rot), $sformatf("tile 2 rotate %h exp %h", res_data[2], rot));
    // tile 3: store tile 2's word, read it back
    send(3, OP_WRITE, 0, 0, 9, 0, 0, '0, 1); wait_res(3);
    send(3, OP_READ, 0, 0, 9, 0, 0, '0); wait_res(3);
    chk(res_data[3] == XB_COLS'(rot), "tile 3 got tile 2 word");
    // tile 0 takes ext_data
    ext_data = {$urandom, $urandom, $urandom, $urandom};
    send(0, OP_WRITE, 2, 0, 1, 0, 0, '0, 1); wait_res(0);
    send(0, OP_READ, 2, 0, 1, 0, 0, '0); wait_res(0);
    chk(res_data[0] == ext_data, "tile 0 from ext_data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
