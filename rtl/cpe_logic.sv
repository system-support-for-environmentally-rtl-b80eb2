// cpe_logic -- in-array logic of a computing PE (CPE).
//
// The CPE computes AND, OR and XOR of two stored N-bit words without a CMOS
// ALU, using a 2xN crossbar: both rows are read at once, so each column
// carries the current of 0, 1 or 2 low-resistance cells, and the column ADC
// decides the logic value by where it puts its sensing levels. AND senses
// '1' only when both cells are in the low-resistance state, which is the
// paper's example. OR uses one level above a single cell and XOR two levels
// (one cell but not two); those two rules are this design's. Each column
// uses a two-device fefet_adc: device 1 fires above 1.5 cell currents,
// device 2 above 0.5. A stored '1' is a low-resistance cell of CELL_I
// current units. Combinational.
module cpe_logic
  import amoeba_pkg::*;
#(
  parameter int unsigned COLS   = 128,
  parameter int unsigned CELL_I = 16      // current of one LRS cell (assumed)
) (
  input  logic [COLS-1:0] row_a,
  input  logic [COLS-1:0] row_b,
  input  logic_fn_e       fn,
  output logic [COLS-1:0] y
);
  localparam int unsigned LW = 8;
  logic [1:0][LW-1:0] thr;
  logic [1:0]         en;

  // Sensing levels: thr[0] (device 1) between one and two cells,
  // thr[1] (device 2) between zero and one cell.
  always_comb begin
    thr[0] = LW'(CELL_I + CELL_I / 2);
    thr[1] = LW'(CELL_I / 2);
    unique case (fn)
      LOGIC_AND: en = 2'b01;       // only the two-cell level
      LOGIC_OR:  en = 2'b10;       // only the one-cell level
      default:   en = 2'b11;       // XOR: both levels
    endcase
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [LW-1:0] level;
    logic [1:0]    code;   // code[1] device 1 (two cells), code[0] device 2
    assign level = LW'(CELL_I) * LW'(row_a[c]) + LW'(CELL_I) * LW'(row_b[c]);
    fefet_adc #(.N_DEV(2), .LW(LW)) u_adc (.level(level), .thr(thr), .en(en), .code(code));
    always_comb begin
      unique case (fn)
        LOGIC_AND: y[c] = code[1];
        LOGIC_OR:  y[c] = code[0];
        default:   y[c] = code[0] & ~code[1];
      endcase
    end
  end
endmodule
