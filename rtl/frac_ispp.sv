// frac_ispp -- incremental step pulse programming of a group of FRAC cells.
//
// After an erase every cell sits at position 0. Programming sends pulses of
// growing amplitude; after each pulse a verify senses every cell against
// the verify level of its target position, and a cell that has reached it
// is inhibited from further pulses. This is the paper's incremental step
// pulse scheme. The paper adds that an m-state cell with m < 8 need not
// start with the small first pulse of a TLC: here the first amplitude is
// the verify level of state 1 of the m-state cell (position 1 for a TLC,
// position 4 for m = 2 or 3), so fewer-state cells need fewer pulses, the
// effect that lengthens their endurance. Amplitudes, the STEP size and the
// Vth units are this design's. Cells with target state 0, and cells at or
// above alpha, are inhibited from the start.
// Flash side: F_PULSE and F_SENSE requests, each a one-cycle pulse on
// req.cmd and answered by f_ack (with f_gt for F_SENSE).
// Host side: start while idle; done pulses with pulses (number of program
// pulses sent) and fail (cells still not verified after MAX_PULSES).
module frac_ispp
  import frac_pkg::*;
#(
  parameter int unsigned STEP       = 4,    // amplitude step (assumed)
  parameter int unsigned MAX_PULSES = 40    // give-up limit (assumed)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [3:0]       m,
  input  logic [3:0]       alpha,
  input  logic [3:0]       blk,
  input  logic [5:0]       grp,
  input  st_t [MAX_A-1:0]  target,
  output flash_req_t       req,
  input  logic             f_ack,
  input  logic [MAX_A-1:0] f_gt,
  output logic             busy,
  output logic             done,
  output logic [5:0]       pulses,
  output logic             fail
);
  typedef enum logic [2:0] {P_IDLE, P_PULSE, P_PWAIT, P_VERIFY, P_VWAIT} pst_e;
  pst_e st;
  logic [3:0] r_m;
  logic [3:0] r_blk;
  logic [5:0] r_grp;
  lvl_t       amp;
  st_t  [MAX_A-1:0] tgt;
  logic [MAX_A-1:0] inh;

  assign busy = (st != P_IDLE);

  // cells inhibited from the start: beyond alpha, or target state 0
  logic [MAX_A-1:0] inh0;
  always_comb begin
    for (int i = 0; i < MAX_A; i++)
      inh0[i] = (i >= int'(alpha)) || (target[i] == '0);
  end

  always_comb begin
    req = '0;
    req.blk = r_blk;
    req.grp = r_grp;
    req.amp = amp;
    req.inhibit = inh;
    for (int i = 0; i < MAX_A; i++)
      req.level[i] = verify_level(state_pos(r_m, tgt[i]));
    if (st == P_PULSE)  req.cmd = F_PULSE;
    if (st == P_VERIFY) req.cmd = F_SENSE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= P_IDLE;
      r_m    <= 4'd8;
      r_blk  <= '0;
      r_grp  <= '0;
      amp    <= '0;
      tgt    <= '0;
      inh    <= '0;
      done   <= 1'b0;
      pulses <= '0;
      fail   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        P_IDLE:
          if (start) begin
            r_m    <= m;
            r_blk  <= blk;
            r_grp  <= grp;
            tgt    <= target;
            amp    <= verify_level(state_pos(m, 3'd1));
            pulses <= '0;
            fail   <= 1'b0;
            inh <= inh0;
            if (&inh0) begin
              done <= 1'b1;            // nothing to program
            end else st <= P_PULSE;
          end
        P_PULSE: st <= P_PWAIT;
        P_PWAIT:
          if (f_ack) begin
            pulses <= pulses + 6'd1;
            st     <= P_VERIFY;
          end
        P_VERIFY: st <= P_VWAIT;
        P_VWAIT:
          if (f_ack) begin
            inh <= inh | f_gt;
            if (&(inh | f_gt)) begin
              st   <= P_IDLE;
              done <= 1'b1;
            end else if (pulses == 6'(MAX_PULSES)) begin
              st   <= P_IDLE;
              done <= 1'b1;
              fail <= 1'b1;
            end else begin
              amp <= amp + lvl_t'(STEP);
              st  <= P_PULSE;
            end
          end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
