// frac_ctrl -- FRAC controller for a storage system built on recycled NAND
// flash.
//
// FRAC trades capacity for lifetime: as a block wears out it is switched
// from 8 Vth states per cell (TLC) to fewer, m, and stores
// floor(log2(m^alpha)) bits in each group of alpha cells. Capacity therefore
// shrinks in small steps instead of halving. This controller keeps the
// (m, alpha) setting of each of N_BLK blocks and turns host requests into
// flash commands, as the paper's prototype controller does:
//   FR_CFG    set (m, alpha) of blk; rdata <- capacity of one page in bits,
//             floor(PAGE_CELLS/alpha) * floor(log2(m^alpha)); err if m is
//             not in 2..8 or alpha not in 1..10
//   FR_WRITE  frac_codec encode, then frac_ispp programs group grp of blk
//             (the block must have been erased); pulses <- pulses used,
//             err <- program failure
//   FR_READ   frac_sense reads group grp, frac_codec decodes; iters <-
//             sensing iterations, err <- the cells hold no valid code
//   FR_ERASE  erase blk
// PAGE_CELLS = 10922 makes a TLC page 4 KB (3 bits per cell), which is the
// page size the paper starts from. The request set, the handshake and the
// block table are this design's. Host side: req_valid/req_ready, one request
// at a time; resp_valid pulses for one cycle. Flash side: see frac_pkg
// (flash_req_t, answered by f_ack/f_gt).
module frac_ctrl
  import frac_pkg::*;
#(
  parameter int unsigned N_BLK      = 16,     // blocks (assumed)
  parameter int unsigned PAGE_CELLS = 10922   // cells per page: 4 KB as TLC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,
  output logic                req_ready,
  input  freq_op_e            req_op,
  input  logic [3:0]          req_blk,
  input  logic [5:0]          req_grp,
  input  logic [DW-1:0]       req_wdata,
  input  logic [3:0]          req_m,
  input  logic [3:0]          req_alpha,
  output logic                resp_valid,
  output logic [DW-1:0]       resp_rdata,
  output logic                resp_err,
  output logic [5:0]          resp_pulses,
  output logic [2:0]          resp_iters,
  // flash array
  output flash_req_t          f_req,
  input  logic                f_ack,
  input  logic [MAX_A-1:0]    f_gt
);
  typedef enum logic [2:0] {K_IDLE, K_ENC, K_PROG, K_SENSE, K_DEC, K_ERASE, K_EWAIT} kst_e;
  kst_e st;

  logic [3:0] tab_m [N_BLK];
  logic [3:0] tab_a [N_BLK];
  logic [3:0] r_blk, cm, ca;
  logic [5:0] r_grp;

  // sub-blocks
  logic            cd_start, cd_dir, cd_done, cd_inv, cd_busy;
  logic [DW-1:0]   cd_dout;
  st_t [MAX_A-1:0] cd_sout, sn_states;
  logic            sn_start, sn_done, sn_busy;
  logic [2:0]      sn_iters;
  logic            pg_start, pg_done, pg_fail, pg_busy;
  logic [5:0]      pg_pulses;
  flash_req_t      sn_req, pg_req;
  logic [DW-1:0]   r_wdata;

  assign cm = tab_m[r_blk];
  assign ca = tab_a[r_blk];

  frac_codec u_codec (
    .clk(clk), .rst_n(rst_n), .start(cd_start), .dir(cd_dir), .m(cm), .alpha(ca),
    .din(r_wdata), .states_in(sn_states), .busy(cd_busy), .done(cd_done),
    .dout(cd_dout), .states_out(cd_sout), .invalid(cd_inv));

  frac_sense u_sense (
    .clk(clk), .rst_n(rst_n), .start(sn_start), .m(cm), .alpha(ca),
    .blk(r_blk), .grp(r_grp), .req(sn_req), .f_ack(f_ack), .f_gt(f_gt),
    .busy(sn_busy), .done(sn_done), .states(sn_states), .iters(sn_iters));

  frac_ispp u_ispp (
    .clk(clk), .rst_n(rst_n), .start(pg_start), .m(cm), .alpha(ca),
    .blk(r_blk), .grp(r_grp), .target(cd_sout), .req(pg_req), .f_ack(f_ack),
    .f_gt(f_gt), .busy(pg_busy), .done(pg_done), .pulses(pg_pulses), .fail(pg_fail));

  always_comb begin
    f_req = '0;
    unique case (st)
      K_SENSE: f_req = sn_req;
      K_PROG:  f_req = pg_req;
      K_ERASE: begin
        f_req.cmd = F_ERASE;
        f_req.blk = r_blk;
      end
      default: ;
    endcase
  end

  assign req_ready = (st == K_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= K_IDLE;
      r_blk       <= '0;
      r_grp       <= '0;
      r_wdata     <= '0;
      cd_start    <= 1'b0;
      cd_dir      <= 1'b0;
      sn_start    <= 1'b0;
      pg_start    <= 1'b0;
      resp_valid  <= 1'b0;
      resp_rdata  <= '0;
      resp_err    <= 1'b0;
      resp_pulses <= '0;
      resp_iters  <= '0;
      for (int b = 0; b < N_BLK; b++) begin
        tab_m[b] <= 4'd8;
        tab_a[b] <= 4'd1;
      end
    end else begin
      cd_start   <= 1'b0;
      sn_start   <= 1'b0;
      pg_start   <= 1'b0;
      resp_valid <= 1'b0;
      unique case (st)
        K_IDLE:
          if (req_valid) begin
            r_blk   <= req_blk;
            r_grp   <= req_grp;
            r_wdata <= req_wdata;
            resp_pulses <= '0;
            resp_iters  <= '0;
            unique case (req_op)
              FR_CFG: begin
                if (req_m >= 4'd2 && req_m <= 4'd8 && req_alpha >= 4'd1 &&
                    32'(req_alpha) <= MAX_A && 32'(req_blk) < N_BLK) begin
                  tab_m[req_blk] <= req_m;
                  tab_a[req_blk] <= req_alpha;
                  resp_rdata <= DW'((PAGE_CELLS / 32'(req_alpha)) *
                                    32'(frac_bits(req_m, req_alpha)));
                  resp_err   <= 1'b0;
                end else begin
                  resp_rdata <= '0;
                  resp_err   <= 1'b1;
                end
                resp_valid <= 1'b1;
              end
              FR_WRITE: begin
                cd_start <= 1'b1;
                cd_dir   <= 1'b0;
                st       <= K_ENC;
              end
              FR_READ: begin
                sn_start <= 1'b1;
                st       <= K_SENSE;
              end
              default: st <= K_ERASE;
            endcase
          end
        K_ENC:
          if (cd_done) begin
            pg_start <= 1'b1;
            st       <= K_PROG;
          end
        K_PROG:
          if (pg_done) begin
            resp_err    <= pg_fail;
            resp_pulses <= pg_pulses;
            resp_rdata  <= '0;
            resp_valid  <= 1'b1;
            st          <= K_IDLE;
          end
        K_SENSE:
          if (sn_done) begin
            resp_iters <= sn_iters;
            cd_start   <= 1'b1;
            cd_dir     <= 1'b1;
            st         <= K_DEC;
          end
        K_DEC:
          if (cd_done) begin
            resp_rdata <= cd_dout;
            resp_err   <= cd_inv;
            resp_valid <= 1'b1;
            st         <= K_IDLE;
          end
        K_ERASE: st <= K_EWAIT;
        K_EWAIT:
          if (f_ack) begin
            resp_err   <= 1'b0;
            resp_rdata <= '0;
            resp_valid <= 1'b1;
            st         <= K_IDLE;
          end
        default: st <= K_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = cd_busy ^ sn_busy ^ pg_busy;
endmodule
