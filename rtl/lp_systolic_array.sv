// lp_systolic_array: low-power output-stationary Bfloat16 systolic array
// with bus-invert coded weights and zero-value clock gating of inputs.
//
// Structure (North to South): Weight Buffer -> one bus-invert encoder (ENC)
// per column -> ROWS x COLS low-power PEs -> Output Buffer. West edge: Input
// Buffer -> one zero detector (==0) per row -> PEs. The controller streams a
// tile with the systolic skew, then unloads it. This arrangement, the
// fraction-only bus-invert coding of weights, the zero gating of inputs and
// the 16 x 16 size are the paper's; buffer organisation and depth, the host
// ports and the controller handshake are this design's choices.
//
// Use: write A[r][k] into input bank r word k and B[k][c] into weight bank
// c word k, pulse start with k_len = K, wait for done (K + 2*ROWS + COLS
// cycles after start), then read C[r][c] = sum_k A[r][k]*B[k][c] (Bfloat16,
// accumulated in order k = 0..K-1, zero activations skipped) through the
// output read port, one cycle read latency. Buffers may be written at any
// time; writing a bank while a tile reads it changes that tile's data.
module lp_systolic_array
  import lpsa_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned DEPTH = 4608,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned KW   = $clog2(DEPTH + 1),
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW   = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // input (activation) buffer write port, bank = row
  input  logic          in_wr_en,
  input  logic [RW-1:0] in_wr_row,
  input  logic [AW-1:0] in_wr_addr,
  input  bf16_t         in_wr_data,
  // weight buffer write port, bank = column
  input  logic          wt_wr_en,
  input  logic [CW-1:0] wt_wr_col,
  input  logic [AW-1:0] wt_wr_addr,
  input  bf16_t         wt_wr_data,
  // tile control
  input  logic          start,
  input  logic [KW-1:0] k_len,
  output logic          busy,
  output logic          done,
  // output buffer read port
  input  logic [RW-1:0] out_rd_row,
  input  logic [CW-1:0] out_rd_col,
  output bf16_t         out_rd_data
);

  logic          w_rd_en   [COLS];
  logic [AW-1:0] w_rd_addr [COLS];
  logic          a_rd_en   [ROWS];
  logic [AW-1:0] a_rd_addr [ROWS];
  bf16_t         w_raw     [COLS];
  bf16_t         a_raw     [ROWS];
  wgt_t          w_enc     [COLS];
  act_t          a_zd      [ROWS];
  bf16_t         acc_south [COLS];
  logic          unload, o_wr_en;
  logic [RW-1:0] o_wr_row;

  sa_controller #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .k_len, .busy, .done,
    .w_rd_en, .w_rd_addr, .a_rd_en, .a_rd_addr,
    .unload, .o_wr_en, .o_wr_row
  );

  edge_buffer #(.BANKS(COLS), .DEPTH(DEPTH)) u_wbuf (
    .clk, .rst_n,
    .wr_en   (wt_wr_en),
    .wr_bank (wt_wr_col),
    .wr_addr (wt_wr_addr),
    .wr_data (wt_wr_data),
    .rd_en   (w_rd_en),
    .rd_addr (w_rd_addr),
    .rd_data (w_raw)
  );

  edge_buffer #(.BANKS(ROWS), .DEPTH(DEPTH)) u_ibuf (
    .clk, .rst_n,
    .wr_en   (in_wr_en),
    .wr_bank (in_wr_row),
    .wr_addr (in_wr_addr),
    .wr_data (in_wr_data),
    .rd_en   (a_rd_en),
    .rd_addr (a_rd_addr),
    .rd_data (a_raw)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_enc
    bic_encoder u_enc (.clk, .rst_n, .w_in(w_raw[c]), .w_out(w_enc[c]));
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_zd
    zero_detector u_zd (.a_in(a_raw[r]), .a_out(a_zd[r]));
  end

  pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .unload,
    .a_west    (a_zd),
    .w_north   (w_enc),
    .acc_south (acc_south)
  );

  output_buffer #(.ROWS(ROWS), .COLS(COLS)) u_obuf (
    .clk,
    .wr_en   (o_wr_en),
    .wr_row  (o_wr_row),
    .wr_data (acc_south),
    .rd_row  (out_rd_row),
    .rd_col  (out_rd_col),
    .rd_data (out_rd_data)
  );

endmodule
