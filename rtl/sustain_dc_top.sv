// sustain_dc_top -- hardware of the sustainable data-centre node: the
// Amoeba nonvolatile PIM accelerator and the FRAC recycled-flash
// controller, side by side.
//
// The two parts answer two sides of the same problem. Amoeba keeps compute
// going through renewable-power swings because its crossbars are
// nonvolatile and can be reconfigured between engines. FRAC keeps
// about-to-wear-out recycled flash in service by lowering the number of
// Vth states per cell step by step. At system level the accelerator's
// snapshots go to that flash, but no signal joins the two blocks, so each
// keeps its own host port. The FeFET entropy sources of the random
// generators and the NAND flash array are external parts: their signals
// are ports of this top. Timing and handshakes are those of amoeba and
// frac_ctrl.
module sustain_dc_top
  import amoeba_pkg::*;
  import frac_pkg::*;
#(
  parameter int unsigned N_TILE = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // Amoeba host port
  input  logic                         a_instr_valid,
  input  logic [$clog2(N_TILE)-1:0]    a_instr_tile,
  input  tile_instr_t                  a_instr,
  output logic                         a_instr_ready,
  input  logic [XB_COLS-1:0]           a_ext_data,
  output logic [N_TILE-1:0]            a_res_valid,
  output logic [N_TILE-1:0][XB_COLS-1:0] a_res_data,
  output logic [N_TILE-1:0][XB_COLS-1:0][XB_SUM_W-1:0] a_res_sums,
  output logic [N_TILE-1:0]            a_res_hit,
  output logic [N_TILE-1:0]            a_res_err,
  output logic [N_TILE-1:0]            a_busy,
  // FeFET entropy sources (one per tile)
  input  logic [N_TILE-1:0]            trg_bit_valid,
  input  logic [N_TILE-1:0]            trg_raw_bit,
  output logic [N_TILE-1:0][3:0]       trg_vw,
  // FRAC host port
  input  logic                         f_req_valid,
  output logic                         f_req_ready,
  input  freq_op_e                     f_req_op,
  input  logic [3:0]                   f_req_blk,
  input  logic [5:0]                   f_req_grp,
  input  logic [DW-1:0]                f_req_wdata,
  input  logic [3:0]                   f_req_m,
  input  logic [3:0]                   f_req_alpha,
  output logic                         f_resp_valid,
  output logic [DW-1:0]                f_resp_rdata,
  output logic                         f_resp_err,
  output logic [5:0]                   f_resp_pulses,
  output logic [2:0]                   f_resp_iters,
  // NAND flash array
  output flash_req_t                   nand_req,
  input  logic                         nand_ack,
  input  logic [MAX_A-1:0]             nand_gt
);
  amoeba #(.N_TILE(N_TILE)) u_amoeba (
    .clk(clk), .rst_n(rst_n),
    .instr_valid(a_instr_valid), .instr_tile(a_instr_tile), .instr(a_instr),
    .instr_ready(a_instr_ready), .ext_data(a_ext_data),
    .res_valid(a_res_valid), .res_data(a_res_data), .res_sums(a_res_sums),
    .res_hit(a_res_hit), .res_err(a_res_err), .busy(a_busy),
    .trg_bit_valid(trg_bit_valid), .trg_raw_bit(trg_raw_bit), .trg_vw(trg_vw));

  frac_ctrl u_frac (
    .clk(clk), .rst_n(rst_n),
    .req_valid(f_req_valid), .req_ready(f_req_ready), .req_op(f_req_op),
    .req_blk(f_req_blk), .req_grp(f_req_grp), .req_wdata(f_req_wdata),
    .req_m(f_req_m), .req_alpha(f_req_alpha),
    .resp_valid(f_resp_valid), .resp_rdata(f_resp_rdata), .resp_err(f_resp_err),
    .resp_pulses(f_resp_pulses), .resp_iters(f_resp_iters),
    .f_req(nand_req), .f_ack(nand_ack), .f_gt(nand_gt));
endmodule
