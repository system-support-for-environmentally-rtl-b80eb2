// tb_fefet_adc -- self-checking test of the FeFET ADC model.
// Checks the paper's example (0.9 V on four devices gives "1100"), the
// precision reduction by disabling devices 1 and 3, and random levels,
// thresholds and enables against a reference computed here.
module tb_fefet_adc;
  logic [7:0]      level;
  logic [3:0][7:0] thr;
  logic [3:0]      en;
  logic [3:0]      code;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  fefet_adc #(.N_DEV(4), .LW(8)) dut (.level(level), .thr(thr), .en(en), .code(code));

  task automatic check(input logic [3:0] exp, input string what);
    checks++;
    if (code !== exp) begin
      failures++;
      $display("FAIL %s: level=%0d code=%b exp=%b", what, level, code, exp);
    end
  endtask

  initial begin
    // level in units of 10 mV: 0.9 V = 90; devices 1..4 at 0.3/0.6/1.2/1.5 V
    thr = {8'd150, 8'd120, 8'd60, 8'd30};
    en = 4'b1111; level = 8'd90; #1; check(4'b1100, "paper example 0.9V");
    level = 8'd20;  #1; check(4'b0000, "below all");
    level = 8'd200; #1; check(4'b1111, "above all");
    level = 8'd130; #1; check(4'b1110, "three devices");
    // disable devices 1 and 3: only bits of devices 2 and 4 remain
    en = 4'b1010; level = 8'd90;  #1; check(4'b0100, "2-bit mode");
    level = 8'd200; #1; check(4'b0101, "2-bit mode high");
    for (int n = 0; n < 500; n++) begin
      logic [3:0] exp;
      level = 8'($urandom); en = 4'($urandom);
      for (int i = 0; i < 4; i++) thr[i] = 8'($urandom);
      #1;
      for (int i = 0; i < 4; i++) exp[3-i] = en[i] && (level > thr[i]);
      check(exp, "random");
    end
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
