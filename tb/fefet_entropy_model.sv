// fefet_entropy_model -- behavioural model of the scaled FeFET entropy
// source of the true random generator, for simulation only.
//
// Each enabled cycle the model gives one raw bit. The probability of a '1'
// rises with the write-voltage code vw: P(1) = (BASE_PCT + STEP_PCT*vw)%,
// clipped to 0..100. With the defaults the source leans towards '0' at
// mid-scale vw, as the paper reports for its baseline device. The numbers
// are illustrative, not device data.
module fefet_entropy_model #(
  parameter int BASE_PCT = 10,
  parameter int STEP_PCT = 4
) (
  input  logic       clk,
  input  logic       en,
  input  logic [3:0] vw,
  output logic       bit_valid,
  output logic       raw_bit
);
  initial begin
    bit_valid = 1'b0;
    raw_bit   = 1'b0;
  end
  always @(posedge clk) begin
    int p;
    p = BASE_PCT + STEP_PCT * int'(vw);
    if (p > 100) p = 100;
    bit_valid <= en;
    raw_bit   <= en && (int'($urandom_range(0, 99)) < p);
  end
endmodule
