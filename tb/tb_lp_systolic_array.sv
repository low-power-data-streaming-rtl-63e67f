// tb_lp_systolic_array: end-to-end test of the whole array at a reduced,
// non-square size (4 rows x 5 columns, 64-word buffers) so that row/column
// mix-ups show. Six tiles run back to back; tb_sa_env holds the sequence and
// the checks.
module tb_lp_systolic_array;
  import lpsa_pkg::*;

  localparam int unsigned ROWS  = 4;
  localparam int unsigned COLS  = 5;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned KW = $clog2(DEPTH + 1);
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1;

  logic          clk, rst_n, in_wr_en, wt_wr_en, start, busy, done;
  logic [RW-1:0] in_wr_row, out_rd_row;
  logic [CW-1:0] wt_wr_col, out_rd_col;
  logic [AW-1:0] in_wr_addr, wt_wr_addr;
  bf16_t         in_wr_data, wt_wr_data, out_rd_data;
  logic [KW-1:0] k_len;
  logic          mon_unload;
  logic          mon_zero_in [ROWS];
  wgt_t          mon_w_enc   [COLS];
  bf16_t         mon_w_raw   [COLS];

  lp_systolic_array #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) dut (.*);

  assign mon_unload = dut.unload;
  for (genvar r = 0; r < ROWS; r++) begin : g_probe_row
    assign mon_zero_in[r] = dut.u_ibuf.g_bank[r].en_q && dut.a_zd[r].is_zero;
  end
  for (genvar c = 0; c < COLS; c++) begin : g_probe_col
    assign mon_w_enc[c] = dut.w_enc[c];
    assign mon_w_raw[c] = dut.w_raw[c];
  end

  tb_sa_env #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .KMAX(64), .TILES(6), .MAX_CYCLES(200000)) env (.*);

endmodule
