// rram_crossbar: behavioural model of a 1T1R memristor crossbar (ROWS word lines x COLS bit lines).
//
// Behavioural model: the real part is an analog RRAM macro (HfO2 memristor in series with an
// NMOS access transistor per cell). Here every cell is one non-volatile bit, 1 for the
// low-resistance state (LRS) and 0 for the high-resistance state (HRS). A write sets or
// resets the cells of one word line; the design programs the array once per encryption
// session, so no write timing is modelled beyond one clock per row.
//
// Read: while sl_rd (the read pulse on the select lines) is high, every cell whose word line
// is driven conducts into its bit line. The analog bit-line voltage is abstracted to a level:
// the number of selected cells in LRS, saturating at 2^LVL_W-1. The sense amplifiers below the
// array turn that level into a logic value. With sl_rd low all levels are 0. The read path is
// combinational: word lines and read pulse in, bit-line levels out, in the same cycle.
//
// Interface: wr_en/wr_row/wr_data program one row on the rising clock edge; wl is the
// word-line vector (one-hot in this design, but any number of rows may be driven);
// bl_lvl[c] is the level of bit line c. There is no reset: like the real array the cells
// keep their state through a reset of the surrounding logic (and, in silicon, through power
// off), so they must be written before they are read.
module rram_crossbar #(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 4,
  parameter int unsigned LVL_W = 2
) (
  input  logic                             clk,
  // programming port
  input  logic                             wr_en,
  input  logic [$clog2(ROWS)-1:0]          wr_row,
  input  logic [COLS-1:0]                  wr_data,
  // read port
  input  logic [ROWS-1:0]                  wl,
  input  logic                             sl_rd,
  output logic [COLS-1:0][LVL_W-1:0]       bl_lvl
);

  localparam int unsigned LVL_MAX = (1 << LVL_W) - 1;

  logic [ROWS-1:0][COLS-1:0] lrs;  // 1 = cell in LRS

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_row) < ROWS)) lrs[wr_row] <= wr_data;
  end

  // Each bit line sums the currents of the selected LRS cells (saturating count).
  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      bl_lvl[c] = '0;
      for (int unsigned r = 0; r < ROWS; r++)
        if (sl_rd && wl[r] && lrs[r][c] && (bl_lvl[c] != LVL_W'(LVL_MAX)))
          bl_lvl[c] = bl_lvl[c] + LVL_W'(1);
    end
  end

endmodule
