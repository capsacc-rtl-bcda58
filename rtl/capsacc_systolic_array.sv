// capsacc_systolic_array: ROWS x COLS grid of capsacc_pe (paper: 16x16).
// Data (with its swap flag) enters each row on the left and moves right; the
// right-hand data outputs are exported for the horizontal feedback path.
// Weights enter each column at the top and move down the Weight1 chain when
// that column's w_shift is high; the last row's weight outputs are unused.
// Partial sums start at zero in the first row and leave at the bottom.
// Timing: with row r fed at cycle t+r (skewed), column c's bottom sum for that
// vector is valid ROWS+c+1 cycles after t.
// The paper gives the array structure; the per-column shift enables and the
// swap flag are this design's control choices.
module capsacc_systolic_array
  import capsacc_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  parameter int unsigned DW   = DATA_W,
  parameter int unsigned SW   = SUM_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [DW-1:0] data_in  [ROWS],
  input  logic                 swap_in  [ROWS],
  input  logic signed [DW-1:0] weight_in[COLS],
  input  logic                 w_shift  [COLS],
  output logic signed [DW-1:0] data_out [ROWS],
  output logic signed [SW-1:0] psum_out [COLS]
);
  logic signed [DW-1:0] d   [ROWS][COLS+1];
  logic                 s   [ROWS][COLS+1];
  logic signed [DW-1:0] w   [ROWS+1][COLS];
  logic signed [SW-1:0] p   [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_rin
    assign d[r][0] = data_in[r];
    assign s[r][0] = swap_in[r];
    assign data_out[r] = d[r][COLS];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_cin
    assign w[0][c] = weight_in[c];
    assign p[0][c] = '0;
    assign psum_out[c] = p[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      capsacc_pe #(.DW(DW), .SW(SW)) u_pe (
        .clk, .rst_n,
        .data_in (d[r][c]),   .swap_in (s[r][c]),
        .weight_in(w[r][c]),  .w_shift (w_shift[c]),
        .psum_in (p[r][c]),
        .data_out(d[r][c+1]), .swap_out(s[r][c+1]),
        .weight_out(w[r+1][c]),
        .psum_out(p[r+1][c])
      );
    end
  end
endmodule
