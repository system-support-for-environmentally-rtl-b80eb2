// tb_trg_tracker -- self-checking test of the TRG probability tracking.
// A biased FeFET entropy model (more '0's at the reset write voltage)
// feeds the tracker. Each 256-bit segment's ones are counted here and
// compared with seg_ones (saturating at 255), the write-voltage step is
// checked against the tracking rule, segment length and the packing of
// 32-bit words are checked, and the loop must pull the ones ratio into the
// dead band. A second phase forces all-ones segments to test saturation
// and downward steps.
module tb_trg_tracker;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       en, force_one;
  logic       bv, rb, mbv, mrb;
  logic [3:0] vw;
  logic       seg_done, word_valid;
  logic [7:0] seg_ones;
  logic [31:0] word;
  int checks = 0, failures = 0;

  fefet_entropy_model src (.clk(clk), .en(en), .vw(vw), .bit_valid(mbv), .raw_bit(mrb));
  assign bv = force_one ? en : mbv;
  assign rb = force_one ? 1'b1 : mrb;

  trg_tracker dut (.clk(clk), .rst_n(rst_n), .bit_valid(bv), .raw_bit(rb), .vw(vw),
    .seg_done(seg_done), .seg_ones(seg_ones), .word(word), .word_valid(word_valid));

  int ones, nbits, segs, wbits, ups, downs;
  logic [31:0] wexp;
  logic [3:0] vw_before;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (seg_done) begin
      int e;
      e = (ones > 255) ? 255 : ones;
      chk(int'(seg_ones) == e, $sformatf("seg_ones=%0d exp=%0d", seg_ones, e));
      chk(nbits == 256, $sformatf("segment length %0d", nbits));
      if (e < 120) begin
        chk(vw == ((vw_before == 4'hf) ? vw_before : vw_before + 1), "vw step up");
        if (vw != vw_before) ups++;
      end else if (e > 136) begin
        chk(vw == ((vw_before == 0) ? vw_before : vw_before - 1), "vw step down");
        if (vw != vw_before) downs++;
      end else chk(vw == vw_before, "vw hold");
      vw_before = vw;
      ones = 0; nbits = 0; segs++;
    end
    if (word_valid) begin
      chk(word == wexp, $sformatf("word %h exp %h", word, wexp));
    end
    if (bv) begin
      ones += int'(rb);
      nbits++;
      wexp[wbits] = rb;
      wbits = (wbits + 1) % 32;
    end
  end

  initial begin
    en = 0; force_one = 0; ones = 0; nbits = 0; segs = 0; wbits = 0; ups = 0; downs = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    vw_before = 4'd8;
    @(negedge clk); en = 1;
    wait (segs == 20);
    // after 20 segments the tracker must have pulled the ratio near 1/2
    chk(ups > 0, "no upward adjustment seen");
    chk(int'(seg_ones) >= 100 && int'(seg_ones) <= 156, $sformatf("not tracked: %0d", seg_ones));
    @(negedge clk); force_one = 1;
    wait (segs == 24);
    chk(downs > 0, "no downward adjustment seen");
    @(negedge clk); en = 0;
    $display("ups=%0d downs=%0d final vw=%0d", ups, downs, vw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
