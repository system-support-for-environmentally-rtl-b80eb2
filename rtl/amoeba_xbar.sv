// amoeba_xbar -- one reconfigurable FeFET crossbar of an Amoeba tile.
//
// The crossbar is a ROWS x COLS array of nonvolatile one-bit FeFET cells
// with a mode register that configures it, at run time, as one of the three
// processing engines of the paper:
//   APE  XB_SEARCH: CAM search of all rows for key under smask (ape_search);
//        every matching row is rewritten under wmask with wdata in the same
//        cycle (associative write). The
//        search-and-write step is what LUT and the bit-serial ADD are built on.
//   MPE  XB_MVM: x on the wordlines, column sums through the ADC (mpe_mvm).
//   CPE  XB_LOGIC: AND/OR/XOR of rows row and row2 (cpe_logic).
// XB_WRITE (masked row write) and XB_READ work in every mode; XB_CFG sets
// the mode. A mode-specific command issued in the wrong mode does nothing
// and raises err for one cycle, which is this design's rule.
// Timing: one command per cycle, cmd is sampled on the rising edge and all
// results (rdata, match, hit, first, y, err) are registered, so they are
// valid one cycle after the command. Because the cells are nonvolatile the
// array has no reset; the mode register resets to APE.
module amoeba_xbar
  import amoeba_pkg::*;
#(
  parameter int unsigned ROWS  = XB_ROWS,
  parameter int unsigned COLS  = XB_COLS,
  parameter int unsigned SUM_W = $clog2(ROWS + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  xb_cmd_e                    cmd,
  input  pe_mode_e                   mode_in,  // for XB_CFG
  input  logic [$clog2(ROWS)-1:0]    row,
  input  logic [$clog2(ROWS)-1:0]    row2,
  input  logic [COLS-1:0]            key,      // search key
  input  logic [COLS-1:0]            wdata,    // write data
  input  logic [COLS-1:0]            wmask,    // write mask
  input  logic [COLS-1:0]            smask,    // search mask
  input  logic [ROWS-1:0]            x,        // MVM wordline inputs
  input  logic [2:0]                 prec,     // MVM ADC precision
  input  logic_fn_e                  fn,       // CPE function
  output pe_mode_e                   mode,
  output logic [COLS-1:0]            rdata,    // READ row or LOGIC result
  output logic [ROWS-1:0]            match,    // SEARCH match lines
  output logic                       hit,
  output logic [$clog2(ROWS)-1:0]    first,
  output logic [COLS-1:0][SUM_W-1:0] y,        // MVM column sums
  output logic                       err
);
  logic [ROWS-1:0][COLS-1:0]  cells;
  logic [ROWS-1:0]            m_match;
  logic                       m_any;
  logic [$clog2(ROWS)-1:0]    m_first;
  logic [COLS-1:0][SUM_W-1:0] m_y;
  logic [COLS-1:0]            m_logic;

  ape_search #(.ROWS(ROWS), .COLS(COLS)) u_ape (
    .cells(cells), .key(key), .mask(smask),
    .match(m_match), .any_match(m_any), .first(m_first));

  mpe_mvm #(.ROWS(ROWS), .COLS(COLS), .SUM_W(SUM_W)) u_mpe (
    .cells(cells), .x(x), .prec(prec), .y(m_y));

  cpe_logic #(.COLS(COLS)) u_cpe (
    .row_a(cells[row]), .row_b(cells[row2]), .fn(fn), .y(m_logic));

  // Nonvolatile cell array: no reset.
  always_ff @(posedge clk) begin
    if (cmd == XB_WRITE)
      cells[row] <= (cells[row] & ~wmask) | (wdata & wmask);
    else if (cmd == XB_SEARCH && mode == MODE_APE)
      for (int r = 0; r < ROWS; r++)
        if (m_match[r]) cells[r] <= (cells[r] & ~wmask) | (wdata & wmask);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode  <= MODE_APE;
      rdata <= '0;
      match <= '0;
      hit   <= 1'b0;
      first <= '0;
      y     <= '0;
      err   <= 1'b0;
    end else begin
      err <= 1'b0;
      unique case (cmd)
        XB_CFG:  mode  <= mode_in;
        XB_READ: rdata <= cells[row];
        XB_SEARCH:
          if (mode == MODE_APE) begin
            match <= m_match;
            hit   <= m_any;
            first <= m_first;
          end else err <= 1'b1;
        XB_MVM:
          if (mode == MODE_MPE) y <= m_y;
          else err <= 1'b1;
        XB_LOGIC:
          if (mode == MODE_CPE) rdata <= m_logic;
          else err <= 1'b1;
        default: ;
      endcase
    end
  end
endmodule
