// amoeba_pkg -- shared types and constants of the Amoeba reconfigurable
// FeFET processing-in-memory accelerator.
//
// Amoeba builds every processing engine (PE) from the same FeFET crossbar.
// A crossbar is logically configured as an associative PE (APE: CAM search,
// used for LUT and ADD), a multiplication PE (MPE: matrix-vector multiply,
// used for MVM and SHIFT) or a computing PE (CPE: two-row in-array logic).
// The three modes and the operation names follow the paper. The crossbar
// size, the data width and the row field layout used by the bit-serial
// associative ADD are choices of this design: the paper gives none of them.
package amoeba_pkg;

  // Crossbar geometry (assumed; the paper gives no crossbar size).
  localparam int unsigned XB_ROWS = 64;
  localparam int unsigned XB_COLS = 128;

  // Operand width of the associative ADD and the MUL product (assumed).
  // MUL takes AW/2-bit operands and gives an AW-bit product.
  localparam int unsigned AW = 32;

  // Row field layout used by ADD/MUL in an APE crossbar:
  //   [A_LSB +: AW] addend A, [B_LSB +: AW] addend/accumulator B,
  //   C_COL carry, D_COL "already written in this bit step" flag.
  localparam int unsigned A_LSB = 0;
  localparam int unsigned B_LSB = AW;
  localparam int unsigned C_COL = 2 * AW;
  localparam int unsigned D_COL = 2 * AW + 1;

  // Row field layout used by LUT: key, value and a valid column.
  localparam int unsigned KEY_LSB = 0;
  localparam int unsigned VAL_LSB = AW;
  localparam int unsigned V_COL   = 2 * AW + 2;

  // Logical configuration of one crossbar.
  typedef enum logic [1:0] {
    MODE_APE = 2'd0,   // associative: search + associative write
    MODE_MPE = 2'd1,   // multiplication: weight-stationary MVM
    MODE_CPE = 2'd2    // computing: two-row AND / OR / XOR
  } pe_mode_e;

  // In-array logic functions of the CPE.
  typedef enum logic [1:0] {
    LOGIC_AND = 2'd0,
    LOGIC_OR  = 2'd1,
    LOGIC_XOR = 2'd2
  } logic_fn_e;

  // Crossbar access commands.
  typedef enum logic [2:0] {
    XB_NOP    = 3'd0,
    XB_CFG    = 3'd1,  // set mode
    XB_WRITE  = 3'd2,  // masked write of one row
    XB_READ   = 3'd3,  // read one row
    XB_SEARCH = 3'd4,  // APE: search, masked write to every matching row
    XB_MVM    = 3'd5,  // MPE: input vector on wordlines -> column sums
    XB_LOGIC  = 3'd6   // CPE: logic of two rows
  } xb_cmd_e;

  // Tile instructions.
  typedef enum logic [3:0] {
    OP_CFG      = 4'd0,   // configure crossbar xb to mode
    OP_WRITE    = 4'd1,   // write data to row of xb
    OP_READ     = 4'd2,   // read row of xb
    OP_LUT      = 4'd3,   // APE lookup: key -> value of first matching row
    OP_ADD      = 4'd4,   // APE: B <= A + B in every row, in parallel
    OP_PRECODE  = 4'd5,   // MPE: write the rotate-by-k permutation matrix
    OP_SHIFT    = 4'd6,   // MPE: rotate data by the pre-coded matrix
    OP_MVM      = 4'd7,   // MPE: column sums for a binary input vector
    OP_LOGIC    = 4'd8,   // CPE: fn(row, row2)
    OP_MUL      = 4'd9,   // APE + MPE: product of two AW/2-bit operands
    OP_RNG      = 4'd10   // read one word of the true random generator
  } tile_op_e;

  localparam int unsigned XB_SUM_W = $clog2(XB_ROWS + 1); // column sum width
  localparam int unsigned XB_IDX = 2;                     // log2 of crossbars per tile

  typedef struct packed {
    tile_op_e                    op;
    logic [XB_IDX-1:0]           xb;     // crossbar used (APE for MUL)
    logic [XB_IDX-1:0]           xb2;    // second crossbar (MPE for MUL)
    logic [$clog2(XB_ROWS)-1:0]  row;
    logic [$clog2(XB_ROWS)-1:0]  row2;
    logic [1:0]                  arg;    // mode for CFG, logic_fn_e for LOGIC
    logic [$clog2(AW)-1:0]       k;      // rotate amount for PRECODE
    logic [2:0]                  prec;   // ADC precision in bits (MVM), 0 = full
    logic                        from_tile; // operand comes from the neighbour tile
    logic [XB_COLS-1:0]          data;
  } tile_instr_t;

endpackage
