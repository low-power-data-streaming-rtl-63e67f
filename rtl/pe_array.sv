// pe_array: ROWS x COLS grid of low-power output-stationary PEs.
//
// Activations with their is_zero flags enter on the West edge, one stream
// per row, and move East one PE per cycle; bus-invert coded weights with
// their inv bits enter on the North edge, one stream per column, and move
// South one PE per cycle. PE (r,c) thus computes
// sum_k A[r][k] * B[k][c] when row r is fed A[r][k] and column c is fed
// B[k][c] with the usual skew (row r and column c each delayed by their
// index). During unload the accumulators of every column shift South one
// row per cycle; acc_south presents the bottom row, so row ROWS-1 leaves
// first and row 0 after ROWS-1 more cycles. Zero is shifted in at the top.
//
// The 16 x 16 default is the size the paper evaluates; the skew itself is
// produced by the controller. Timing: one register per hop in each
// direction, see lp_pe.
module pe_array
  import lpsa_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  unload,
  input  act_t  a_west    [ROWS],
  input  wgt_t  w_north   [COLS],
  output bf16_t acc_south [COLS]
);

  act_t  a_h   [ROWS][COLS+1];
  wgt_t  w_v   [ROWS+1][COLS];
  bf16_t acc_v [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_west
    assign a_h[r][0] = a_west[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_north
    assign w_v[0][c]   = w_north[c];
    assign acc_v[0][c] = '0;
    assign acc_south[c] = acc_v[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      lp_pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .unload  (unload),
        .a_in    (a_h[r][c]),
        .w_in    (w_v[r][c]),
        .acc_in  (acc_v[r][c]),
        .a_out   (a_h[r][c+1]),
        .w_out   (w_v[r+1][c]),
        .acc_out (acc_v[r+1][c])
      );
    end
  end

endmodule
