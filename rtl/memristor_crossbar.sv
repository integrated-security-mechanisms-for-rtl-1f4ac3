// memristor_crossbar: behavioural model of the 1T1R memristive crossbar,
// including its two watermark protection columns.
//
// This is a behavioural model, not synthesizable logic for a digital chip:
// the real block is an analog array of one-transistor-one-memristor cells in
// which each row carries a voltage V_r, each cell a conductance G_r,c, and
// each column sums the cell currents by Kirchhoff's current law, so that
// column c carries I_c = sum_r V_r * G_r,c in one step. The model keeps that
// function with integer codes: row_v[r] is the row voltage code, the stored
// cell code stands for its conductance level, and col_i[c] is the exact
// integer sum of products. Wire parasitics, device non-linearity and the
// access transistor's resistance are not modelled.
//
// Columns. The array has COLS + 2 physical columns. Two of them, at
// WM_COL0 and WM_COL1 (by default the last two, the array's end), are the
// watermark protection columns: they hold no weights, share the rows with
// the weight columns and so draw current like any other column. Their cells
// are set to the fixed pattern wm_pattern(WM_SEED, r, w) by provisioning.
//
// Interface and timing. provision (one clk cycle) zeroes every weight cell
// and writes the watermark pattern; it is the factory initialisation. A
// write (prog_en) sets cell (prog_row, prog_col) to prog_g at the clock
// edge, any physical column, watermark columns included, as an attacker with
// access to the programming path could. provision wins over prog_en. The
// array is non-volatile: reset does not touch it. col_i follows row_v and
// the stored cells combinationally (the analog array settles within a
// clock cycle).
//
// Paper vs. this design. The 1T1R array, the analog MVM, the two watermark
// columns at the array's end and their fixed pattern follow the paper. The
// code widths, the programming port and the provisioning step are this
// design's choices; the paper does not describe how cells are programmed.
module memristor_crossbar
  import xbar_pkg::*;
#(
  parameter int unsigned ROWS      = ROWS_DEF,
  parameter int unsigned COLS      = COLS_DEF,
  parameter int unsigned IN_BITS   = IN_BITS_DEF,
  parameter int unsigned CELL_BITS = CELL_BITS_DEF,
  parameter int unsigned WM_COL0   = COLS,
  parameter int unsigned WM_COL1   = COLS + 1,
  parameter logic [31:0] WM_SEED   = WM_SEED_DEF,
  parameter int unsigned TOT_COLS  = COLS + WM_COLS,
  parameter int unsigned I_BITS    = cur_bits(ROWS, IN_BITS, CELL_BITS)
) (
  input  logic                                  clk,
  // factory initialisation and cell programming
  input  logic                                  provision,
  input  logic                                  prog_en,
  input  logic [$clog2(ROWS)-1:0]               prog_row,
  input  logic [$clog2(TOT_COLS)-1:0]           prog_col,
  input  logic [CELL_BITS-1:0]                  prog_g,
  // analog matrix-vector multiplication
  input  logic [ROWS-1:0][IN_BITS-1:0]          row_v,
  output logic [TOT_COLS-1:0][I_BITS-1:0]       col_i
);

  logic [CELL_BITS-1:0] g [ROWS][TOT_COLS];

  always_ff @(posedge clk) begin
    if (provision) begin
      for (int unsigned r = 0; r < ROWS; r++)
        for (int unsigned c = 0; c < TOT_COLS; c++)
          if (c == WM_COL0)
            g[r][c] <= CELL_BITS'(wm_pattern(WM_SEED, r, 0));
          else if (c == WM_COL1)
            g[r][c] <= CELL_BITS'(wm_pattern(WM_SEED, r, 1));
          else
            g[r][c] <= '0;
    end else if (prog_en) begin
      g[prog_row][prog_col] <= prog_g;
    end
  end

  // Kirchhoff summation of the cell currents down every column.
  always_comb begin
    for (int unsigned c = 0; c < TOT_COLS; c++) begin
      col_i[c] = '0;
      for (int unsigned r = 0; r < ROWS; r++)
        col_i[c] = col_i[c] + I_BITS'(row_v[r]) * I_BITS'(g[r][c]);
    end
  end

  initial begin
    assert (WM_COL0 < WM_COL1 && WM_COL1 < TOT_COLS)
      else $error("memristor_crossbar: need WM_COL0 < WM_COL1 < COLS+2");
  end

endmodule
