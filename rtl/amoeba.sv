// amoeba -- the Amoeba reconfigurable nonvolatile PIM accelerator.
//
// An array of N_TILE tiles (amoeba_tile), as in the paper's architecture
// drawing where tiles T sit on a shared interconnect behind an IO interface.
// The host sends one instruction at a time together with the index of the
// tile that executes it; each tile has its own result port. The drawing
// joins tiles by wires but gives no topology. Here tile i's input MUX sees
// the result buffer of tile i-1 as its "from tile" operand, and tile 0 sees
// ext_data. Results can therefore be passed down the chain, for example an
// APE sum into an MPE shift on the next tile. Each tile has its own TRG, and
// so one FeFET entropy source, whose bit input and write-voltage output are
// ports here. Timing: instr_ready is the addressed tile's ready; an
// instruction is taken on a clock edge where instr_valid and instr_ready
// are both high.
module amoeba
  import amoeba_pkg::*;
#(
  parameter int unsigned N_TILE = 4     // tiles (paper's drawing: 4)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         instr_valid,
  input  logic [$clog2(N_TILE)-1:0]    instr_tile,
  input  tile_instr_t                  instr,
  output logic                         instr_ready,
  input  logic [XB_COLS-1:0]           ext_data,
  output logic [N_TILE-1:0]            res_valid,
  output logic [N_TILE-1:0][XB_COLS-1:0] res_data,
  output logic [N_TILE-1:0][XB_COLS-1:0][XB_SUM_W-1:0] res_sums,
  output logic [N_TILE-1:0]            res_hit,
  output logic [N_TILE-1:0]            res_err,
  output logic [N_TILE-1:0]            busy,
  input  logic [N_TILE-1:0]            trg_bit_valid,
  input  logic [N_TILE-1:0]            trg_raw_bit,
  output logic [N_TILE-1:0][3:0]       trg_vw
);
  logic [N_TILE-1:0] ready;

  for (genvar t = 0; t < N_TILE; t++) begin : g_tile
    logic [XB_COLS-1:0] nb;
    if (t == 0) begin : g_first
      assign nb = ext_data;
    end else begin : g_next
      assign nb = res_data[t-1];
    end
    amoeba_tile u_tile (
      .clk(clk), .rst_n(rst_n),
      .instr_valid(instr_valid && instr_tile == $clog2(N_TILE)'(t)),
      .instr_ready(ready[t]), .instr(instr), .nb_data(nb),
      .res_valid(res_valid[t]), .res_data(res_data[t]), .res_sums(res_sums[t]),
      .res_hit(res_hit[t]), .res_err(res_err[t]), .busy(busy[t]),
      .trg_bit_valid(trg_bit_valid[t]), .trg_raw_bit(trg_raw_bit[t]), .trg_vw(trg_vw[t]));
  end

  assign instr_ready = ready[instr_tile];
endmodule
