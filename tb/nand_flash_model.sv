// nand_flash_model -- behavioural model of a recycled NAND flash array as
// seen by the FRAC controller, for simulation only.
//
// The array has N_BLK blocks of N_GRP cell groups of MAX_A cells; each cell
// holds a Vth value in the units of frac_pkg (16 per TLC position).
// F_ERASE sets every cell of a block to a random Vth in 0..8 (position 0).
// F_PULSE raises each cell that is not inhibited to at least
// amp - 4 + u, with u uniform in 0..4, so one pulse lands within 4 units
// of its amplitude. F_SENSE answers gt[i] = (Vth > level[i]).
// Every command is acknowledged one cycle later with f_ack.
// pulse_count counts the pulses a cell received, the wear that FRAC saves.
module nand_flash_model
  import frac_pkg::*;
#(
  parameter int N_BLK = 16,
  parameter int N_GRP = 64
) (
  input  logic             clk,
  input  flash_req_t       req,
  output logic             f_ack,
  output logic [MAX_A-1:0] f_gt
);
  logic [VW-1:0] vth [N_BLK][N_GRP][MAX_A];
  int            pulse_count;

  initial begin
    f_ack = 1'b0;
    f_gt  = '0;
    pulse_count = 0;
    for (int b = 0; b < N_BLK; b++)
      for (int g = 0; g < N_GRP; g++)
        for (int i = 0; i < MAX_A; i++) vth[b][g][i] = '0;
  end

  always @(posedge clk) begin
    f_ack <= (req.cmd != F_NOP);
    unique case (req.cmd)
      F_ERASE:
        for (int g = 0; g < N_GRP; g++)
          for (int i = 0; i < MAX_A; i++)
            vth[req.blk][g][i] <= VW'($urandom_range(0, 8));
      F_PULSE: begin
        int n;
        n = 0;
        for (int i = 0; i < MAX_A; i++)
          if (!req.inhibit[i]) begin
            int t;
            t = int'(req.amp) - 4 + int'($urandom_range(0, 4));
            if (t > 255) t = 255;
            if (t > int'(vth[req.blk][req.grp][i])) vth[req.blk][req.grp][i] <= VW'(t);
            n++;
          end
        pulse_count <= pulse_count + n;
      end
      F_SENSE:
        for (int i = 0; i < MAX_A; i++)
          f_gt[i] <= vth[req.blk][req.grp][i] > req.level[i];
      default: ;
    endcase
  end

  // Position (0..7) of a cell, for checks.
  function automatic int pos_of(int b, int g, int i);
    return int'(vth[b][g][i]) / VSTATE;
  endfunction
endmodule
