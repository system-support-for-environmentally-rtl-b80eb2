// tb_conv_mvm -- convolution workload kernel on one Amoeba tile: one
// output pixel of a convolution layer for 128 output channels, with 4-bit
// weights and 4-bit activations, computed by weight-stationary MVM.
// A convolution window of 64 inputs (for example 4 channels of a 4x4
// kernel) is flattened onto the 64 wordlines. Output channel c is column c.
// The four weight bit planes are pre-coded into the four crossbars of the
// tile, all configured as MPE, and the activations are applied one bit
// plane at a time, so one output needs 4 x 4 = 16 one-bit MVMs whose column
// sums the host combines as sum over i, j of 2^(i+j) * S[i][j]. Several
// window positions are run and each of the 128 channel results is checked
// against an integer dot product, and the number of cycles is reported.
// The ADC runs at full precision; one run at 3 bits checks that reduced
// precision saturates the large column sums.
module tb_conv_mvm;
  import amoeba_pkg::*;
  localparam int WB = 4;   // weight bits
  localparam int XB = 4;   // activation bits
  localparam int NPOS = 4; // window positions
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

  task automatic run(input tile_op_e op, input int xb, input int row, input int arg, input int prec,
                     input logic [XB_COLS-1:0] data);
    @(negedge clk);
    instr = '0; instr.op = op; instr.xb = 2'(xb); instr.row = 6'(row); instr.arg = 2'(arg);
    instr.prec = 3'(prec); instr.data = data; instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(posedge clk); #1 instr_valid = 0;
    while (!res_valid) @(posedge clk);
    #1;
    if (res_err) begin failures++; $display("FAIL tile refused op %s", op.name()); end
  endtask

  logic [WB-1:0] w [XB_ROWS][XB_COLS];
  logic [XB-1:0] x [XB_ROWS];

  initial begin
    longint start;
    int sat;
    instr_valid = 0; instr = '0; nb_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < XB_ROWS; r++)
      for (int c = 0; c < XB_COLS; c++) w[r][c] = WB'($urandom);
    // pre-code weight bit plane i into crossbar i
    for (int i = 0; i < WB; i++) begin
      run(OP_CFG, i, 0, MODE_MPE, 0, '0);
      for (int r = 0; r < XB_ROWS; r++) begin
        logic [XB_COLS-1:0] d;
        for (int c = 0; c < XB_COLS; c++) d[c] = w[r][c][i];
        run(OP_WRITE, i, r, 0, 0, d);
      end
    end
    start = cycles;
    for (int pos = 0; pos < NPOS; pos++) begin
      longint acc [XB_COLS];
      for (int r = 0; r < XB_ROWS; r++) x[r] = XB'($urandom);
      if (pos == 0) for (int r = 0; r < XB_ROWS; r++) x[r] = '1;
      for (int c = 0; c < XB_COLS; c++) acc[c] = 0;
      for (int j = 0; j < XB; j++) begin
        logic [XB_ROWS-1:0] xv;
        for (int r = 0; r < XB_ROWS; r++) xv[r] = x[r][j];
        for (int i = 0; i < WB; i++) begin
          run(OP_MVM, i, 0, 0, 0, XB_COLS'(xv));
          for (int c = 0; c < XB_COLS; c++) acc[c] += longint'(res_sums[c]) << (i + j);
        end
      end
      for (int c = 0; c < XB_COLS; c++) begin
        longint e;
        e = 0;
        for (int r = 0; r < XB_ROWS; r++) e += longint'(w[r][c]) * longint'(x[r]);
        chk(acc[c] == e, $sformatf("pos %0d channel %0d: %0d exp %0d", pos, c, acc[c], e));
      end
    end
    $display("%0d outputs x %0d channels, %0d-bit x %0d-bit, 64 inputs: %0d cycles (%0d per output)",
             NPOS, XB_COLS, WB, XB, cycles - start, (cycles - start) / NPOS);
    // reduced ADC precision: with all inputs on, sums above 7 saturate
    run(OP_MVM, 0, 0, 0, 3, '1);
    sat = 0;
    for (int c = 0; c < XB_COLS; c++) begin
      int s;
      s = 0; for (int r = 0; r < XB_ROWS; r++) s += int'(w[r][c][0]);
      chk(int'(res_sums[c]) == ((s > 7) ? 7 : s), $sformatf("3-bit ADC channel %0d", c));
      if (s > 7) sat++;
    end
    chk(sat > 0, "some column saturates at 3 bits");
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
