// tb_frac_sense -- self-checking test of the FRAC binary-search read.
// A small responder holds one group of cells at the Vth positions of
// random states and answers each F_SENSE by comparing Vth with the level.
// For every m from 2 to 8 the states read back must match, the number of
// iterations must be ceil(log2 m), and the reference sequence seen by one
// cell must follow the paper's figure: r3 then r5 (above) or r1 (below)
// for a TLC, r3 then r4 for a 3-state cell, r3 alone for a 2-state cell.
module tb_frac_sense;
  import frac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, ack;
  logic [3:0] m, alpha;
  flash_req_t req;
  logic [MAX_A-1:0] gt;
  st_t [MAX_A-1:0] states;
  logic [2:0] iters;
  int checks = 0, failures = 0;
  int vth [MAX_A];
  int refs [$];

  frac_sense dut (.clk(clk), .rst_n(rst_n), .start(start), .m(m), .alpha(alpha),
    .blk(4'd0), .grp(6'd0), .req(req), .f_ack(ack), .f_gt(gt), .busy(busy),
    .done(done), .states(states), .iters(iters));

  always @(posedge clk) begin
    ack <= (req.cmd == F_SENSE);
    if (req.cmd == F_SENSE) begin
      for (int i = 0; i < MAX_A; i++) gt[i] <= vth[i] > int'(req.level[i]);
      refs.push_back((int'(req.level[0]) + 1) / VSTATE - 1);   // r index of cell 0
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic rd(input int mm, input int st0, output st_t s[MAX_A]);
    st_t t[MAX_A];
    for (int i = 0; i < MAX_A; i++) begin
      t[i] = st_t'($urandom_range(0, mm - 1));
      if (i == 0) t[i] = st_t'(st0);
      vth[i] = int'(state_pos(4'(mm), t[i])) * VSTATE + int'($urandom_range(4, 12));
    end
    refs.delete();
    m = 4'(mm); alpha = 4'd10;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    s = t;
  endtask

  initial begin
    st_t exp[MAX_A];
    ack = 0; gt = '0; start = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int mm = 2; mm <= 8; mm++)
      for (int n = 0; n < 20; n++) begin
        int need;
        rd(mm, $urandom_range(0, mm - 1), exp);
        need = (mm <= 2) ? 1 : (mm <= 4) ? 2 : 3;
        chk(int'(iters) == need && refs.size() == need, $sformatf("m=%0d iterations %0d", mm, iters));
        for (int i = 0; i < MAX_A; i++)
          chk(states[i] == exp[i], $sformatf("m=%0d cell %0d state %0d exp %0d", mm, i, states[i], exp[i]));
      end
    // reference sequences of the paper's read figure
    rd(8, 6, exp); chk(refs.size() == 3 && refs[0] == 3 && refs[1] == 5 && refs[2] == 6, "TLC state 6: r3 r5 r6");
    rd(8, 1, exp); chk(refs.size() == 3 && refs[0] == 3 && refs[1] == 1 && refs[2] == 0, "TLC state 1: r3 r1 r0");
    rd(8, 2, exp); chk(refs[1] == 1 && refs[2] == 2, "TLC state 2: r3 r1 r2");
    rd(3, 2, exp); chk(refs.size() == 2 && refs[0] == 3 && refs[1] == 4, "3-state: r3 r4");
    rd(2, 1, exp); chk(refs.size() == 1 && refs[0] == 3, "2-state: r3");
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
