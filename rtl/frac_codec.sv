// frac_codec -- data <-> cell-state translation of a FRAC cell group.
//
// A group of alpha m-state fraction cells can hold m^alpha patterns, and
// FRAC stores floor(log2(m^alpha)) data bits in it. For two 3-state cells
// the translation is the truth table printed in the paper (states named by
// their TLC labels 111, 011, 000):
//   cell0 cell1 data     cell0 cell1 data
//    111   111   111      011   011   100
//    011   111   011      000   011   000
//    000   111   001      111   000   010
//    111   011   101      011   000   110
// and the ninth pattern (000,000) holds no data. The paper gives no table
// for any other (m, alpha), so this design uses a base-m positional code
// with cell 0 as the least significant digit.
// Encode (dir=0): din -> states_out, one digit per cycle by division by m,
// alpha cycles. Decode (dir=1): states_in -> dout by Horner's rule, alpha
// cycles. The Fig. 2(b) table takes one cycle. done pulses for one cycle.
// invalid is set on decode when the pattern holds no data (value of
// 2^bits or more, or a state index of m or more).
// start is taken only while idle; m in 2..8 and alpha in 1..10 are assumed.
module frac_codec
  import frac_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  dir,          // 0 encode, 1 decode
  input  logic [3:0]            m,
  input  logic [3:0]            alpha,
  input  logic [DW-1:0]         din,
  input  st_t [MAX_A-1:0]       states_in,
  output logic                  busy,
  output logic                  done,
  output logic [DW-1:0]         dout,
  output st_t [MAX_A-1:0]       states_out,
  output logic                  invalid
);
  logic [3:0]    r_m, r_a, idx;
  logic          r_dir;
  logic [DW+3:0] val;
  logic [4:0]    nb;
  logic          tbl;

  assign nb  = frac_bits(r_m, r_a);
  assign tbl = (m == 4'd3) && (alpha == 4'd2);

  // Fig. 2(b): data -> (cell0, cell1) state indices (0 = 111, 1 = 011, 2 = 000).
  function automatic logic [5:0] tbl_enc(input logic [2:0] d);
    unique case (d)
      3'b111: return {3'd0, 3'd0};   // {cell1, cell0}
      3'b011: return {3'd0, 3'd1};
      3'b001: return {3'd0, 3'd2};
      3'b101: return {3'd1, 3'd0};
      3'b100: return {3'd1, 3'd1};
      3'b000: return {3'd1, 3'd2};
      3'b010: return {3'd2, 3'd0};
      default: return {3'd2, 3'd1};  // 3'b110
    endcase
  endfunction

  function automatic logic [3:0] tbl_dec(input st_t c0, input st_t c1);
    // returns {invalid, data}
    unique case ({c1, c0})
      {3'd0, 3'd0}: return 4'b0111;
      {3'd0, 3'd1}: return 4'b0011;
      {3'd0, 3'd2}: return 4'b0001;
      {3'd1, 3'd0}: return 4'b0101;
      {3'd1, 3'd1}: return 4'b0100;
      {3'd1, 3'd2}: return 4'b0000;
      {3'd2, 3'd0}: return 4'b0010;
      {3'd2, 3'd1}: return 4'b0110;
      default:      return 4'b1000;
    endcase
  endfunction

  logic [5:0]    t_enc;
  logic [3:0]    t_dec;
  logic [DW+3:0] nv;       // Horner step of the decode
  assign t_enc = tbl_enc(din[2:0]);
  assign t_dec = tbl_dec(states_in[0], states_in[1]);
  assign nv    = val * (DW+4)'(r_m) + (DW+4)'(states_in[idx]);

  typedef enum logic [1:0] {C_IDLE, C_ENC, C_DEC} cst_e;
  cst_e st;

  assign busy = (st != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_IDLE;
      r_m        <= 4'd8;
      r_a        <= 4'd1;
      r_dir      <= 1'b0;
      idx        <= '0;
      val        <= '0;
      done       <= 1'b0;
      dout       <= '0;
      states_out <= '0;
      invalid    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE:
          if (start) begin
            r_m   <= m;
            r_a   <= alpha;
            r_dir <= dir;
            invalid <= 1'b0;
            if (tbl) begin
              if (!dir) begin
                states_out    <= '0;
                states_out[0] <= t_enc[2:0];
                states_out[1] <= t_enc[5:3];
              end else begin
                dout    <= DW'(t_dec[2:0]);
                invalid <= t_dec[3];
              end
              done <= 1'b1;
            end else if (!dir) begin
              val        <= (DW+4)'(din & DW'((64'd1 << frac_bits(m, alpha)) - 1));
              idx        <= '0;
              states_out <= '0;
              st         <= C_ENC;
            end else begin
              val <= '0;
              idx <= alpha - 4'd1;
              st  <= C_DEC;
            end
          end
        C_ENC: begin
          states_out[idx] <= st_t'(val % (DW+4)'(r_m));
          val <= val / (DW+4)'(r_m);
          if (idx == r_a - 4'd1) begin
            st   <= C_IDLE;
            done <= 1'b1;
          end else idx <= idx + 4'd1;
        end
        C_DEC: begin
          val <= nv;
          if ({1'b0, states_in[idx]} >= r_m) invalid <= 1'b1;
          if (idx == 4'd0) begin
            st   <= C_IDLE;
            done <= 1'b1;
            dout <= nv[DW-1:0];
            if ((nv >> nb) != '0) invalid <= 1'b1;
          end else idx <= idx - 4'd1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = r_dir;
endmodule
