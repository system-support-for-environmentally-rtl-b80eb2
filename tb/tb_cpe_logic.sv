// tb_cpe_logic -- self-checking test of the CPE in-array logic.
// Random row pairs for AND, OR and XOR, plus the four corner patterns,
// compared with the operators of the language.
module tb_cpe_logic;
  import amoeba_pkg::*;
  localparam int COLS = 128;
  logic [COLS-1:0] a, b, y;
  logic_fn_e fn;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  cpe_logic #(.COLS(COLS)) dut (.row_a(a), .row_b(b), .fn(fn), .y(y));

  initial begin
    for (int n = 0; n < 300; n++) begin
      logic [COLS-1:0] exp;
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      if (n < 3) begin a = {32{4'b1100}}; b = {32{4'b1010}}; end
      fn = logic_fn_e'(n % 3);
      #1;
      unique case (fn)
        LOGIC_AND: exp = a & b;
        LOGIC_OR:  exp = a | b;
        default:   exp = a ^ b;
      endcase
      checks++;
      if (y !== exp) begin
        failures++;
        $display("FAIL fn=%0d y=%h exp=%h", fn, y, exp);
      end
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
