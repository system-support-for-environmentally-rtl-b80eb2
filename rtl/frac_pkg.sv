// frac_pkg -- shared types and tables of the FRAC fraction-cell flash
// controller.
//
// A recycled TLC flash cell has eight threshold-voltage (Vth) positions,
// 0 (erased, labelled 111) to 7 (labelled 000). As a block wears, FRAC
// keeps only m of them (2 <= m <= 8) and stores floor(log2(m^alpha)) bits in
// a group of alpha such cells. This package holds the placement of the m
// states on the eight positions, the read reference used at each state
// boundary, and the Vth units of the behavioural flash interface.
// The placements for m = 2, 3 and 8 and the references r3 (m=2), r3/r4
// (m=3) and r0..r6 (m=8) follow the paper's figures. The placements for
// m = 4..7 and all Vth numbers are this design's choices.
package frac_pkg;

  localparam int unsigned MAX_A  = 10;   // cells per group (up to 10)
  localparam int unsigned DW     = 30;   // floor(log2(8^10)) = 30 bits
  localparam int unsigned VW     = 8;    // Vth / level width
  localparam int unsigned VSTATE = 16;   // Vth units per TLC position

  typedef logic [2:0] st_t;              // state index of a cell (0..m-1)
  typedef logic [VW-1:0] lvl_t;

  // Flash array commands of the behavioural interface.
  typedef enum logic [1:0] {
    F_NOP   = 2'd0,
    F_ERASE = 2'd1,    // erase a block: every cell back to position 0
    F_PULSE = 2'd2,    // one program pulse of amplitude amp, inhibit mask
    F_SENSE = 2'd3     // compare each cell's Vth with its level: gt[i]
  } fcmd_e;

  typedef struct packed {
    fcmd_e                    cmd;
    logic [3:0]               blk;
    logic [5:0]               grp;
    lvl_t                     amp;
    logic [MAX_A-1:0]         inhibit;
    logic [MAX_A-1:0][VW-1:0] level;
  } flash_req_t;

  // Host requests.
  typedef enum logic [1:0] {
    FR_READ  = 2'd0,
    FR_WRITE = 2'd1,
    FR_ERASE = 2'd2,
    FR_CFG   = 2'd3     // set a block's state count m and group size alpha
  } freq_op_e;

  // TLC position (0..7) of state s of an m-state cell.
  function automatic logic [2:0] state_pos(input logic [3:0] m, input st_t s);
    logic [2:0] p;
    unique case (m)
      4'd2: p = (s == 3'd0) ? 3'd0 : 3'd4;
      4'd3: p = (s == 3'd0) ? 3'd0 : (s == 3'd1) ? 3'd4 : 3'd7;
      4'd4: p = {s[1:0], 1'b0};                               // 0,2,4,6
      4'd5: p = (s == 3'd4) ? 3'd7 : {s[1:0], 1'b0};          // 0,2,4,6,7
      4'd6: p = (s < 3'd3) ? s : (s == 3'd3) ? 3'd4 : (s == 3'd4) ? 3'd6 : 3'd7;
      4'd7: p = (s < 3'd5) ? s : s + 3'd1;                    // 0..4,6,7
      default: p = s;                                          // m = 8
    endcase
    return p;
  endfunction

  // Read reference index r_j used at the boundary between states j and j+1.
  function automatic logic [2:0] bound_ref(input logic [3:0] m, input st_t j);
    logic [2:0] r;
    unique case (m)
      4'd2: r = 3'd3;
      4'd3: r = (j == 3'd0) ? 3'd3 : 3'd4;
      4'd4: r = {j[1:0], 1'b1};                                // r1,r3,r5
      4'd5: r = (j == 3'd3) ? 3'd6 : {j[1:0], 1'b1};           // r1,r3,r5,r6
      4'd6: r = (j < 3'd2) ? j : (j == 3'd2) ? 3'd3 : (j == 3'd3) ? 3'd5 : 3'd6;
      4'd7: r = (j < 3'd4) ? j : j + 3'd1;                     // r0..r3,r5,r6
      default: r = j;                                          // r0..r6
    endcase
    return r;
  endfunction

  // Level of read reference r_j: Vth above it means position > j.
  function automatic lvl_t ref_level(input logic [2:0] j);
    return lvl_t'((int'(j) + 1) * VSTATE - 1);
  endfunction

  // Program-verify level of TLC position p: passed when Vth > level.
  function automatic lvl_t verify_level(input logic [2:0] p);
    return lvl_t'(int'(p) * VSTATE + 3);
  endfunction

  // Data bits held by alpha m-state cells: floor(log2(m^alpha)).
  function automatic logic [4:0] frac_bits(input logic [3:0] m, input logic [3:0] alpha);
    logic [35:0] p;
    logic [4:0]  b;
    p = 36'd1;
    for (int i = 0; i < MAX_A; i++)
      if (i < int'(alpha)) p = p * 36'(m);
    b = '0;
    for (int i = 0; i < 36; i++)
      if (p[i]) b = 5'(i);
    return b;
  endfunction

endpackage
