// tb_frac_ctrl -- self-checking test of the FRAC controller with the
// behavioural flash model.
// Configures blocks for TLC (8/1), 2-state, the paper's two-3-state-cell
// example (3/2), 3/7, 5/10 and 7/5 cells, checks the reported page
// capacity (computed here from the formula), erases each block, writes
// random data to several groups and reads it back, and checks the number
// of sensing iterations. A bad configuration must be refused, and reading
// an erased group must give the all-erased code.
module tb_frac_ctrl;
  import frac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, resp_valid, resp_err, ack;
  freq_op_e req_op;
  logic [3:0] req_blk, req_m, req_alpha;
  logic [5:0] req_grp, resp_pulses;
  logic [DW-1:0] req_wdata, resp_rdata;
  logic [2:0] resp_iters;
  flash_req_t freq;
  logic [MAX_A-1:0] gt;
  int checks = 0, failures = 0;

  frac_ctrl dut (.clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready),
    .req_op(req_op), .req_blk(req_blk), .req_grp(req_grp), .req_wdata(req_wdata),
    .req_m(req_m), .req_alpha(req_alpha), .resp_valid(resp_valid), .resp_rdata(resp_rdata),
    .resp_err(resp_err), .resp_pulses(resp_pulses), .resp_iters(resp_iters),
    .f_req(freq), .f_ack(ack), .f_gt(gt));

  nand_flash_model #(.N_BLK(16), .N_GRP(64)) flash (.clk(clk), .req(freq), .f_ack(ack), .f_gt(gt));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic op(input freq_op_e o, input int b, input int g, input longint d,
                    input int mm, input int aa);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_op = o; req_blk = 4'(b); req_grp = 6'(g); req_wdata = DW'(d);
    req_m = 4'(mm); req_alpha = 4'(aa);
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
  endtask

  initial begin
    int cm[6] = '{8, 2, 3, 3, 5, 7};
    int ca[6] = '{1, 1, 2, 7, 10, 5};
    req_valid = 0; req_op = FR_READ; req_blk = 0; req_grp = 0; req_wdata = 0; req_m = 8; req_alpha = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    op(FR_CFG, 9, 0, 0, 9, 1);  chk(resp_err, "m=9 must be refused");
    op(FR_CFG, 9, 0, 0, 3, 11); chk(resp_err, "alpha=11 must be refused");
    for (int c = 0; c < 6; c++) begin
      int bits, cap;
      bits = $clog2(int'($pow(cm[c], ca[c])) + 1) - 1;
      cap = (10922 / ca[c]) * bits;
      op(FR_CFG, c, 0, 0, cm[c], ca[c]);
      chk(!resp_err && int'(resp_rdata) == cap,
          $sformatf("capacity m=%0d a=%0d: %0d exp %0d", cm[c], ca[c], resp_rdata, cap));
      op(FR_ERASE, c, 0, 0, 0, 0);
      chk(!resp_err, "erase");
      // an erased group reads as all cells in state 0
      op(FR_READ, c, 63, 0, 0, 0);
      chk(int'(resp_iters) == $clog2(cm[c]), $sformatf("iterations %0d", resp_iters));
      if (!(cm[c] == 3 && ca[c] == 2))
        chk(resp_rdata == '0 && !resp_err, "erased group reads 0");
      else
        chk(resp_rdata == DW'(3'b111) && !resp_err, "erased 3/2 group reads 111");
      for (int g = 0; g < 6; g++) begin
        longint d;
        d = longint'({$urandom, $urandom}) & ((64'd1 << bits) - 1);
        op(FR_WRITE, c, g, d, 0, 0);
        chk(!resp_err, $sformatf("write m=%0d err=%0d", cm[c], resp_err));
        op(FR_READ, c, g, 0, 0, 0);
        chk(!resp_err && longint'(resp_rdata) == d,
            $sformatf("m=%0d a=%0d grp %0d read %h exp %h", cm[c], ca[c], g, resp_rdata, d));
      end
    end
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
