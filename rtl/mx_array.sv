// mx_array: weight-stationary bit-serial systolic array of MX cells.
//
// ROWS x COLS grid of mx_cell. Row r holds one filter (one row of the packed
// filter matrix); column c holds one combined column, i.e. one group of up to
// ALPHA input channels. Input data and its sideband enter at the bottom of
// every column and move up one row per cycle; partial sums enter at the left
// of every row (IL interleaved bit-serial streams) and move right one column
// per cycle, so row r's results leave the right edge.
//
// Timing: the caller skews the inputs as in a classical systolic array:
// column c's data must lag column 0's by c cycles and row r's y_in must lag
// row 0's by r cycles. Then the word of stream j for a given pixel leaves row
// r on y_out[r][j] r + COLS cycles after its first data bit
// entered column 0. ys_out[r] is the sideband as seen by the last cell of row
// r, delayed one cycle, so it is aligned with y_out[r]: stream j's word
// starts when ys_out[r].phase == 8j.
//
// Weight loading: when wl_en is high every column shifts its load chain up
// by one cell, taking wl_in[c] at the bottom. After ROWS shifts the entry
// shifted in first sits in the top row. Commit is carried in the sideband.
// The grid, the cell and the data directions follow the paper; the load
// chain is this design's own choice of how weights reach the cells.
module mx_array
  import cc_pkg::*;
#(
  parameter int ROWS = 32,
  parameter int COLS = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ALPHA-1:0] x_in  [COLS],
  input  xside_t           xs_in [COLS],
  input  logic [IL-1:0]    y_in  [ROWS],
  output logic [IL-1:0]    y_out [ROWS],
  output xside_t           ys_out[ROWS],
  input  logic             wl_en,
  input  wentry_t          wl_in [COLS]
);

  // Vertical nets: index r is the input of row r; index ROWS is the top.
  logic [ALPHA-1:0] xv  [ROWS+1][COLS];
  xside_t           xsv [ROWS+1][COLS];
  wentry_t          wv  [ROWS+1][COLS];
  // Horizontal nets: index c is the input of column c; index COLS is the right edge.
  logic [IL-1:0]    yh  [ROWS][COLS+1];

  for (genvar c = 0; c < COLS; c++) begin : g_bot
    assign xv[0][c]  = x_in[c];
    assign xsv[0][c] = xs_in[c];
    assign wv[0][c]  = wl_in[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign yh[r][0]  = y_in[r];
    assign y_out[r]  = yh[r][COLS];
    assign ys_out[r] = xsv[r+1][COLS-1];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mx_cell u_cell (
        .clk    (clk),
        .rst_n  (rst_n),
        .x_in   (xv[r][c]),
        .xs_in  (xsv[r][c]),
        .x_out  (xv[r+1][c]),
        .xs_out (xsv[r+1][c]),
        .y_in   (yh[r][c]),
        .y_out  (yh[r][c+1]),
        .wl_en  (wl_en),
        .wl_in  (wv[r][c]),
        .wl_out (wv[r+1][c])
      );
    end
  end

endmodule
