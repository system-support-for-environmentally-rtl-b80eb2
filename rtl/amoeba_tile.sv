// amoeba_tile -- one Amoeba tile: four reconfigurable crossbars, the tile
// controller, the input MUX, the result buffer and a true random generator.
//
// The tile follows the paper's tile drawing: IO interface, a MUX that takes
// an operand either from the instruction or from the neighbour tile, a
// buffer, a controller (Ctrl), four crossbars (XB) with their ADCs, and a
// TRG. Every crossbar can be reconfigured at run time as APE, MPE or CPE.
// The controller turns one instruction into a sequence of crossbar commands:
//   OP_CFG      xb <- mode arg                                 1 command
//   OP_WRITE    row of xb <- data                              1 command
//   OP_READ     result <- row of xb                            1 command
//   OP_LUT      APE: search key (data[AW-1:0]) in the key field of valid
//               rows, result <- value field of the first hit; hit flag
//   OP_ADD      APE: B <= A + B in every row in parallel, bit-serially:
//               per bit one "clear done flag" search-write, then one
//               search-write for each of the 8 full-adder input patterns
//               (done, carry, A_i, B_i), writing sum into B_i, carry-out,
//               and done=1 so that a rewritten row is not matched again in
//               the same bit. 1 + 9*AW commands.
//   OP_PRECODE  MPE: write the rotate-left-by-k permutation matrix into xb
//               (row r has a 1 in column (r+k) mod AW). ROWS commands.
//   OP_SHIFT    MPE: result <- data[AW-1:0] rotated, via one MVM with 1-bit
//               ADC precision
//   OP_MVM      MPE: sums <- column sums of data[ROWS-1:0] at precision prec
//   OP_LOGIC    CPE: result <- fn(row, row2)
//   OP_MUL      APE xb + MPE xb2: result <- a*b, a = data[AW/2-1:0],
//               b = data[AW-1:AW/2]. Shift-and-add: for each bit of b, an
//               associative ADD of the shifted multiplicand into B if the
//               bit is set, then the multiplicand is rotated by one through
//               xb2, which must hold the rotate-by-1 matrix. The APE row
//               'row' holds the operands; ADD also rewrites the B, carry and
//               done fields of the other rows of xb, which MUL uses as
//               scratch.
//   OP_RNG      result <- next 32-bit word of the TRG
// That combining APE and MPE gives MUL, and SHIFT as an MVM with a
// pre-coded permutation matrix, are the paper's ideas. The instruction set,
// the row field layout and all schedules are this design's.
// Interface: instr_valid/instr_ready handshake; one instruction at a time.
// res_valid pulses for one cycle when an instruction finishes, with
// res_data, res_sums (MVM), res_hit (LUT) and res_err (a crossbar refused a
// command because it was in the wrong mode). res_data stays in the result
// buffer and is what the next tile sees as nb_data.
module amoeba_tile
  import amoeba_pkg::*;
#(
  parameter int unsigned N_XB = 4       // crossbars per tile (paper: 4)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          instr_valid,
  output logic                          instr_ready,
  input  tile_instr_t                   instr,
  input  logic [XB_COLS-1:0]            nb_data,     // from neighbour tile
  output logic                          res_valid,
  output logic [XB_COLS-1:0]            res_data,
  output logic [XB_COLS-1:0][XB_SUM_W-1:0] res_sums,
  output logic                          res_hit,
  output logic                          res_err,
  output logic                          busy,
  // FeFET entropy source of the TRG
  input  logic                          trg_bit_valid,
  input  logic                          trg_raw_bit,
  output logic [3:0]                    trg_vw
);
  localparam int unsigned RW = $clog2(XB_ROWS);
  localparam int unsigned HB = AW / 2;

  typedef enum logic [4:0] {
    S_IDLE, S_ONE, S_LUT_RD, S_ADD_C, S_ADD_D, S_ADD_P, S_PRE,
    S_MUL_INIT, S_MUL_BIT, S_MUL_RDA, S_MUL_MVM, S_MUL_WRA, S_MUL_RDB,
    S_RNG, S_CAPT
  } state_e;

  state_e              state;
  tile_instr_t         ins;
  logic [XB_COLS-1:0]  opd;
  logic [$clog2(AW)-1:0] bitc;    // ADD bit / MUL bit
  logic [3:0]          pat;       // ADD pattern 0..7
  logic [RW:0]         prow;      // PRECODE row counter
  logic                err_seen;

  // ---- crossbar command bus (one crossbar addressed at a time) ----
  xb_cmd_e             c_cmd;
  logic [XB_IDX-1:0]   c_xb;
  logic [RW-1:0]       c_row, c_row2;
  logic [XB_COLS-1:0]  c_key, c_wdata, c_wmask, c_smask;
  logic [XB_ROWS-1:0]  c_x;
  logic [2:0]          c_prec;

  xb_cmd_e             xb_cmd  [N_XB];
  pe_mode_e            xb_mode [N_XB];
  logic [XB_COLS-1:0]  xb_rdata[N_XB];
  logic [XB_ROWS-1:0]  xb_match[N_XB];
  logic                xb_hit  [N_XB];
  logic [RW-1:0]       xb_first[N_XB];
  logic [XB_COLS-1:0][XB_SUM_W-1:0] xb_y [N_XB];
  logic [N_XB-1:0]     xb_err;

  for (genvar g = 0; g < N_XB; g++) begin : g_xb
    assign xb_cmd[g] = (c_xb == XB_IDX'(g)) ? c_cmd : XB_NOP;
    amoeba_xbar u_xb (
      .clk(clk), .rst_n(rst_n), .cmd(xb_cmd[g]), .mode_in(pe_mode_e'(ins.arg)),
      .row(c_row), .row2(c_row2), .key(c_key), .wdata(c_wdata), .wmask(c_wmask),
      .smask(c_smask), .x(c_x), .prec(c_prec), .fn(logic_fn_e'(ins.arg)),
      .mode(xb_mode[g]), .rdata(xb_rdata[g]), .match(xb_match[g]), .hit(xb_hit[g]),
      .first(xb_first[g]), .y(xb_y[g]), .err(xb_err[g]));
  end

  // Selected crossbar's registered outputs (valid one cycle after a command).
  logic [XB_COLS-1:0]  s_rdata;
  logic                s_hit;
  logic [RW-1:0]       s_first;
  logic [XB_COLS-1:0][XB_SUM_W-1:0] s_y;
  assign s_rdata = xb_rdata[c_xb];
  assign s_hit   = xb_hit[c_xb];
  assign s_first = xb_first[c_xb];
  assign s_y     = xb_y[c_xb];

  // ---- TRG ----
  logic [AW-1:0] rng_word, rng_buf;
  logic          rng_wv, rng_full;
  logic          seg_done;
  logic [7:0]    seg_ones;
  trg_tracker #(.WORD_W(AW)) u_trg (
    .clk(clk), .rst_n(rst_n), .bit_valid(trg_bit_valid), .raw_bit(trg_raw_bit),
    .vw(trg_vw), .seg_done(seg_done), .seg_ones(seg_ones),
    .word(rng_word), .word_valid(rng_wv));

  // ---- ADD pattern decode ----
  logic pa, pb, pc, psum, pcout;
  assign pc    = pat[2];
  assign pa    = pat[1];
  assign pb    = pat[0];
  assign psum  = pa ^ pb ^ pc;
  assign pcout = (pa & pb) | (pc & (pa ^ pb));

  // MUL uses ins.xb as APE and ins.xb2 as MPE.
  logic mul_op;
  assign mul_op = (ins.op == OP_MUL);

  always_comb begin
    c_cmd   = XB_NOP;
    c_xb    = ins.xb;
    c_row   = ins.row;
    c_row2  = ins.row2;
    c_key   = '0;
    c_wdata = '0;
    c_wmask = '0;
    c_smask = '0;
    c_x     = '0;
    c_prec  = ins.prec;
    unique case (state)
      S_ONE: begin
        unique case (ins.op)
          OP_CFG:   c_cmd = XB_CFG;
          OP_WRITE: begin c_cmd = XB_WRITE; c_wdata = opd; c_wmask = '1; end
          OP_READ:  c_cmd = XB_READ;
          OP_LUT: begin
            c_cmd = XB_SEARCH;
            c_key[KEY_LSB +: AW] = opd[AW-1:0];
            c_key[V_COL]         = 1'b1;
            c_smask[KEY_LSB +: AW] = '1;
            c_smask[V_COL]         = 1'b1;
          end
          OP_SHIFT: begin c_cmd = XB_MVM; c_x[AW-1:0] = opd[AW-1:0]; c_prec = 3'd1; end
          OP_MVM:   begin c_cmd = XB_MVM; c_x = opd[XB_ROWS-1:0]; end
          OP_LOGIC: c_cmd = XB_LOGIC;
          default: ;
        endcase
      end
      S_LUT_RD: begin
        c_cmd = s_hit ? XB_READ : XB_NOP;
        c_row = s_first;
      end
      S_ADD_C: begin                      // clear carry of every row
        c_cmd = XB_SEARCH;
        c_wmask[C_COL] = 1'b1;
      end
      S_ADD_D: begin                      // clear done flag of every row
        c_cmd = XB_SEARCH;
        c_wmask[D_COL] = 1'b1;
      end
      S_ADD_P: begin                      // one full-adder pattern
        c_cmd = XB_SEARCH;
        c_key[A_LSB + 32'(bitc)] = pa;
        c_key[B_LSB + 32'(bitc)] = pb;
        c_key[C_COL]             = pc;
        c_smask[A_LSB + 32'(bitc)] = 1'b1;
        c_smask[B_LSB + 32'(bitc)] = 1'b1;
        c_smask[C_COL]             = 1'b1;
        c_smask[D_COL]             = 1'b1;
        c_wdata[B_LSB + 32'(bitc)] = psum;
        c_wdata[C_COL]             = pcout;
        c_wdata[D_COL]             = 1'b1;
        c_wmask[B_LSB + 32'(bitc)] = 1'b1;
        c_wmask[C_COL]             = 1'b1;
        c_wmask[D_COL]             = 1'b1;
      end
      S_PRE: begin
        c_cmd   = XB_WRITE;
        c_row   = prow[RW-1:0];
        c_wmask = '1;
        if (32'(prow) < AW)
          c_wdata[(32'(prow) + 32'(ins.k)) % AW] = 1'b1;
      end
      S_MUL_INIT: begin
        c_cmd = XB_WRITE;
        c_wdata[A_LSB +: HB] = opd[HB-1:0];
        c_wmask[A_LSB +: AW] = '1;
        c_wmask[B_LSB +: AW] = '1;
        c_wmask[C_COL] = 1'b1;
        c_wmask[D_COL] = 1'b1;
      end
      S_MUL_RDA: c_cmd = XB_READ;          // multiplicand out of the APE
      S_MUL_MVM: begin                     // rotate it through the MPE
        c_cmd  = XB_MVM;
        c_xb   = ins.xb2;
        c_x[AW-1:0] = xb_rdata[ins.xb][A_LSB +: AW];
        c_prec = 3'd1;
      end
      S_MUL_WRA: begin                     // write it back
        c_cmd = XB_WRITE;
        for (int c = 0; c < AW; c++) c_wdata[A_LSB + c] = xb_y[ins.xb2][c][0];
        c_wmask[A_LSB +: AW] = '1;
      end
      S_MUL_RDB: c_cmd = XB_READ;
      default: ;
    endcase
  end

  assign instr_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ins       <= '0;
      opd       <= '0;
      bitc      <= '0;
      pat       <= '0;
      prow      <= '0;
      err_seen  <= 1'b0;
      res_valid <= 1'b0;
      res_data  <= '0;
      res_sums  <= '0;
      res_hit   <= 1'b0;
      res_err   <= 1'b0;
      rng_buf   <= '0;
      rng_full  <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (|xb_err) err_seen <= 1'b1;
      if (rng_wv) begin
        rng_buf  <= rng_word;
        rng_full <= 1'b1;
      end
      unique case (state)
        S_IDLE:
          if (instr_valid) begin
            ins      <= instr;
            opd      <= instr.from_tile ? nb_data : instr.data;
            err_seen <= 1'b0;
            bitc     <= '0;
            pat      <= '0;
            prow     <= '0;
            unique case (instr.op)
              OP_ADD:     state <= S_ADD_C;
              OP_PRECODE: state <= S_PRE;
              OP_MUL:     state <= S_MUL_INIT;
              OP_RNG:     state <= S_RNG;
              default:    state <= S_ONE;
            endcase
          end
        S_ONE:   state <= (ins.op == OP_LUT) ? S_LUT_RD : S_CAPT;
        S_LUT_RD: begin
          res_hit <= s_hit;
          state   <= S_CAPT;
        end
        S_ADD_C: state <= S_ADD_D;
        S_ADD_D: begin
          pat   <= '0;
          state <= S_ADD_P;
        end
        S_ADD_P:
          if (pat == 4'd7) begin
            if (bitc == $clog2(AW)'(AW - 1)) state <= mul_op ? S_MUL_RDA : S_CAPT;
            else begin
              bitc  <= bitc + 1'b1;
              state <= S_ADD_D;
            end
          end else pat <= pat + 1'b1;
        S_PRE:
          if (prow == (RW+1)'(XB_ROWS - 1)) state <= S_CAPT;
          else prow <= prow + 1'b1;
        S_MUL_INIT: state <= S_MUL_BIT;
        S_MUL_BIT:
          if (opd[HB + 32'(prow)]) begin    // prow counts multiplier bits in MUL
            bitc  <= '0;
            state <= S_ADD_C;
          end else state <= S_MUL_RDA;
        S_MUL_RDA: state <= S_MUL_MVM;
        S_MUL_MVM: state <= S_MUL_WRA;
        S_MUL_WRA:
          if (prow == (RW+1)'(HB - 1)) state <= S_MUL_RDB;
          else begin
            prow  <= prow + 1'b1;
            state <= S_MUL_BIT;
          end
        S_MUL_RDB: state <= S_CAPT;
        S_RNG:
          if (rng_full && !rng_wv) begin
            rng_full  <= 1'b0;
            res_data  <= XB_COLS'(rng_buf);
            res_err   <= 1'b0;
            res_valid <= 1'b1;
            state     <= S_IDLE;
          end
        S_CAPT: begin
          unique case (ins.op)
            OP_READ, OP_LOGIC: res_data <= s_rdata;
            OP_LUT:   res_data <= res_hit ? XB_COLS'(s_rdata[VAL_LSB +: AW]) : '0;
            OP_SHIFT: for (int c = 0; c < XB_COLS; c++)
                        res_data[c] <= (c < AW) ? s_y[c][0] : 1'b0;
            OP_MVM:   res_sums <= s_y;
            OP_MUL:   res_data <= XB_COLS'(s_rdata[B_LSB +: AW]);
            default:  res_data <= '0;
          endcase
          res_err   <= err_seen | (|xb_err);
          res_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Unused TRG status (kept for observation in simulation).
  logic unused_trg;
  assign unused_trg = seg_done ^ (^seg_ones) ^ (^xb_match[0]) ^ (^xb_mode[0]);

  // Handshake rule: a new instruction is only taken while idle.
  a_ready_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 instr_ready |-> state == S_IDLE);
endmodule
