// tb_lp_systolic_array_full: the whole array at its default size, 16 x 16
// PEs with 4608-word buffers, instantiated without parameter overrides. The
// first tile uses the full buffer depth (K = 4608, the longest reduction of
// a ResNet-50 layer: 3x3 kernel over 512 channels) with half of the
// activations zero; two shorter tiles follow. tb_sa_env holds the sequence
// and the checks.
module tb_lp_systolic_array_full;
  import lpsa_pkg::*;

  localparam int unsigned ROWS  = 16;
  localparam int unsigned COLS  = 16;
  localparam int unsigned DEPTH = 4608;
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

  lp_systolic_array dut (.*);

  assign mon_unload = dut.unload;
  for (genvar r = 0; r < ROWS; r++) begin : g_probe_row
    assign mon_zero_in[r] = dut.u_ibuf.g_bank[r].en_q && dut.a_zd[r].is_zero;
  end
  for (genvar c = 0; c < COLS; c++) begin : g_probe_col
    assign mon_w_enc[c] = dut.w_enc[c];
    assign mon_w_raw[c] = dut.w_raw[c];
  end

  tb_sa_env #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .KMAX(4608), .TILES(3), .MAX_CYCLES(3000000)) env (.*);

endmodule
