// tb_frac_ispp -- self-checking test of FRAC incremental step pulse
// programming against the behavioural flash model.
// For every m, random target states are programmed into an erased group;
// afterwards each cell must sit at the TLC position of its target state
// (no overshoot into the next position), cells with target 0 must not have
// moved, and the pulse count must match the ramp from the first amplitude
// to the highest target. Groups whose highest target is the top state show
// that a 3-state cell needs fewer pulses than a TLC (the paper's larger
// first pulse).
module tb_frac_ispp;
  import frac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, fail, ack;
  logic [3:0] m, alpha;
  logic [5:0] grp;
  st_t [MAX_A-1:0] target;
  flash_req_t req, req_p, req_e;
  logic [MAX_A-1:0] gt;
  logic [5:0] pulses;
  int checks = 0, failures = 0;
  logic erase;

  frac_ispp dut (.clk(clk), .rst_n(rst_n), .start(start), .m(m), .alpha(alpha),
    .blk(4'd1), .grp(grp), .target(target), .req(req_p), .f_ack(ack), .f_gt(gt),
    .busy(busy), .done(done), .pulses(pulses), .fail(fail));

  always_comb begin
    req_e = '0; req_e.cmd = F_ERASE; req_e.blk = 4'd1;
    req = erase ? req_e : req_p;
  end

  nand_flash_model #(.N_BLK(2), .N_GRP(64)) flash (.clk(clk), .req(req), .f_ack(ack), .f_gt(gt));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic prog(input int mm, input int g, input int top, output int np);
    m = 4'(mm); alpha = 4'd10; grp = 6'(g);
    for (int i = 0; i < MAX_A; i++) target[i] = st_t'($urandom_range(0, mm - 1));
    if (top >= 0) target[3] = st_t'(top);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    np = int'(pulses);
  endtask

  initial begin
    int np, p8, p3;
    start = 0; erase = 0; target = '0; m = 8; alpha = 10; grp = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); erase = 1; @(negedge clk); erase = 0; @(negedge clk);
    for (int mm = 2; mm <= 8; mm++)
      for (int n = 0; n < 6; n++) begin
        int g, hi, lo_amp, need;
        g = (mm - 2) * 6 + n;
        prog(mm, g, -1, np);
        chk(!fail, $sformatf("m=%0d program failed", mm));
        hi = 0;
        for (int i = 0; i < MAX_A; i++) begin
          int p;
          p = int'(state_pos(4'(mm), target[i]));
          if (target[i] != 0 && p > hi) hi = p;
          chk(flash.pos_of(1, g, i) == p,
              $sformatf("m=%0d cell %0d at pos %0d exp %0d", mm, i, flash.pos_of(1, g, i), p));
        end
        // pulse count: the ramp starts at the verify level of state 1
        lo_amp = int'(verify_level(state_pos(4'(mm), 3'd1)));
        need = (hi == 0) ? 0 : (int'(verify_level(3'(hi))) - lo_amp) / 4 + 1;
        chk(np >= need && np <= need + 2, $sformatf("m=%0d pulses %0d need about %0d", mm, np, need));
      end
    prog(8, 50, 7, p8);
    prog(3, 51, 2, p3);
    $display("pulses to reach the top state: TLC %0d, 3-state %0d", p8, p3);
    chk(p3 < p8, "3-state cell must need fewer pulses than TLC");
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
