// trg_tracker -- probability tracking of the FeFET true random generator.
//
// The generator's entropy source is the stochastic switching of a scaled
// FeFET: the pulse generator writes the device with voltage V_w, the read
// current i_o is turned into a voltage and sampled as one raw bit. Raw bits
// lean towards '0'. Following the paper, an 8-bit counter counts the ones in
// each consecutive 256-bit segment, and that count steers the write voltage
// used for the next segment. The steering rule is this design's: after a
// segment, vw goes one step up if fewer than 128-DEAD ones were seen, one
// step down if more than 128+DEAD, and stays otherwise. The counter
// saturates at 255, because a segment of 256 ones needs a ninth bit.
// Raw bits are also packed, LSB first, into WORD_W-bit random words.
// Interface: bit_valid/raw_bit from the sampling circuit, one bit per cycle
// at most. vw is the write-voltage code for the pulse generator. seg_done
// pulses for one cycle with seg_ones holding the finished segment's count,
// and vw takes its new value in that same cycle. word_valid pulses when word
// holds WORD_W fresh bits.
module trg_tracker #(
  parameter int unsigned SEG_BITS = 256,  // segment length (paper: 256)
  parameter int unsigned CNT_W    = 8,    // counter width (paper: 8 bits)
  parameter int unsigned VW_W     = 4,    // write-voltage code width (assumed)
  parameter int unsigned DEAD     = 8,    // dead band around 1/2 (assumed)
  parameter int unsigned WORD_W   = 32    // random word width (assumed)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bit_valid,
  input  logic              raw_bit,
  output logic [VW_W-1:0]   vw,
  output logic              seg_done,
  output logic [CNT_W-1:0]  seg_ones,
  output logic [WORD_W-1:0] word,
  output logic              word_valid
);
  localparam int unsigned HALF = SEG_BITS / 2;
  localparam int unsigned PW   = $clog2(SEG_BITS);
  localparam int unsigned WPW  = $clog2(WORD_W);

  logic [PW-1:0]    pos;      // bit position inside the segment
  logic [CNT_W-1:0] ones;     // 8-bit saturating ones counter
  logic [CNT_W-1:0] ones_nx;
  logic [WPW-1:0]   wpos;

  always_comb begin
    ones_nx = ones;
    if (raw_bit && ones != '1) ones_nx = ones + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos        <= '0;
      ones       <= '0;
      vw         <= VW_W'(1 << (VW_W - 1));   // mid-scale
      seg_done   <= 1'b0;
      seg_ones   <= '0;
      word       <= '0;
      wpos       <= '0;
      word_valid <= 1'b0;
    end else begin
      seg_done   <= 1'b0;
      word_valid <= 1'b0;
      if (bit_valid) begin
        word[wpos] <= raw_bit;
        wpos       <= wpos + 1'b1;
        if (wpos == WPW'(WORD_W - 1)) word_valid <= 1'b1;
        if (pos == PW'(SEG_BITS - 1)) begin
          pos      <= '0;
          ones     <= '0;
          seg_done <= 1'b1;
          seg_ones <= ones_nx;
          if (int'(ones_nx) < int'(HALF - DEAD) && vw != '1) vw <= vw + 1'b1;
          else if (int'(ones_nx) > int'(HALF + DEAD) && vw != '0) vw <= vw - 1'b1;
        end else begin
          pos  <= pos + 1'b1;
          ones <= ones_nx;
        end
      end
    end
  end
endmodule
