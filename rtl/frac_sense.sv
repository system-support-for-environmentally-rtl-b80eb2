// frac_sense -- binary-search read of a group of FRAC cells.
//
// Reading an m-state cell takes ceil(log2 m) sensing iterations, and the
// read reference of each iteration depends on the previous result: a TLC
// is first compared with r3, then with r5 if it was above or r1 if not, and
// so on. For a cell whose state lies in [lo, hi], this module compares the
// boundary b = (lo+hi-1)/2 (between states b and b+1) with the reference
// frac_pkg::bound_ref(m, b), then moves to [b+1, hi] or [lo, b]. That rule
// gives the paper's r3 -> r1/r5 -> r0/r2/r4/r6 for TLC and r3 -> r4 for a
// 3-state cell. All alpha cells of a group are sensed together, each with
// its own reference, for exactly ceil(log2 m) iterations; a cell that is
// already resolved keeps its state.
// Flash side: one F_SENSE request per iteration (a one-cycle pulse on
// req.cmd), answered by f_ack with f_gt one or more cycles later.
// req.amp and req.inhibit are program-only fields of the shared request
// type and are always 0 here; frac_ctrl merges this port with the
// programmer's.
// Host side: start (while idle) with m and alpha; done pulses with states
// and iters (the number of sensing iterations used).
module frac_sense
  import frac_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [3:0]       m,
  input  logic [3:0]       alpha,
  input  logic [3:0]       blk,
  input  logic [5:0]       grp,
  output flash_req_t       req,
  input  logic             f_ack,
  input  logic [MAX_A-1:0] f_gt,
  output logic             busy,
  output logic             done,
  output st_t [MAX_A-1:0]  states,
  output logic [2:0]       iters
);
  typedef enum logic [1:0] {R_IDLE, R_ISSUE, R_WAIT} rst_e;
  rst_e st;
  logic [3:0] r_m, r_a;
  logic [3:0] r_blk;
  logic [5:0] r_grp;
  logic [2:0] need;                  // ceil(log2 m)
  st_t [MAX_A-1:0] lo, hi;

  function automatic logic [2:0] clog2m(input logic [3:0] mm);
    return (mm <= 4'd2) ? 3'd1 : (mm <= 4'd4) ? 3'd2 : 3'd3;
  endfunction

  function automatic st_t bnd(input st_t l, input st_t h);
    return st_t'((4'(l) + 4'(h) - 4'd1) >> 1);
  endfunction

  assign busy = (st != R_IDLE);

  // lower bound after the current sensing result
  st_t [MAX_A-1:0] lo_nx;
  always_comb begin
    for (int i = 0; i < MAX_A; i++)
      lo_nx[i] = (lo[i] < hi[i] && f_gt[i]) ? bnd(lo[i], hi[i]) + 3'd1 : lo[i];
  end

  always_comb begin
    req = '0;
    req.blk = r_blk;
    req.grp = r_grp;
    if (st == R_ISSUE) begin
      req.cmd = F_SENSE;
      for (int i = 0; i < MAX_A; i++)
        req.level[i] = ref_level(bound_ref(r_m, bnd(lo[i], hi[i])));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= R_IDLE;
      r_m    <= 4'd8;
      r_a    <= 4'd1;
      r_blk  <= '0;
      r_grp  <= '0;
      need   <= '0;
      lo     <= '0;
      hi     <= '0;
      done   <= 1'b0;
      states <= '0;
      iters  <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        R_IDLE:
          if (start) begin
            r_m   <= m;
            r_a   <= alpha;
            r_blk <= blk;
            r_grp <= grp;
            need  <= clog2m(m);
            iters <= '0;
            for (int i = 0; i < MAX_A; i++) begin
              lo[i] <= '0;
              hi[i] <= st_t'(m - 4'd1);
            end
            st <= R_ISSUE;
          end
        R_ISSUE: st <= R_WAIT;
        R_WAIT:
          if (f_ack) begin
            for (int i = 0; i < MAX_A; i++)
              if (lo[i] < hi[i]) begin
                if (f_gt[i]) lo[i] <= bnd(lo[i], hi[i]) + 3'd1;
                else         hi[i] <= bnd(lo[i], hi[i]);
              end
            iters <= iters + 3'd1;
            if (iters + 3'd1 == need) begin
              st   <= R_IDLE;
              done <= 1'b1;
              for (int i = 0; i < MAX_A; i++)
                states[i] <= (i < int'(r_a)) ? lo_nx[i] : '0;
            end else st <= R_ISSUE;
          end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
