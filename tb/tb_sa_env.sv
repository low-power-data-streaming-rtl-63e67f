// tb_sa_env: end-to-end test sequence for lp_systolic_array, shared by
// the reduced-size and the full-size testbenches, which instantiate the
// array themselves and connect it and a few internal probe signals here.
//
// For each of TILES tiles it draws a reduction length K (the first tile uses
// KMAX, later ones are random in 1..KMAX), an activation matrix A (ROWS x K)
// with a per-tile share of zeros (50 %, 0 %, 90 %, then random) and a weight
// matrix B (K x COLS) with a few zero weights, writes both through the host
// ports, pulses start and checks that done rises exactly K + 2*ROWS + COLS
// clock edges after the edge that samples start. It then reads every
// result and compares it with a reference
// C[r][c] = sum over k of A[r][k]*B[k][c], accumulated in order k = 0..K-1
// with Bfloat16 rounding after every step (bf16_ref_pkg) and zero
// activations skipped. Tiles run back to back without reset, so a tile also
// checks that the previous unload cleared the accumulators.
//
// While tiles run it counts each mechanism of the design and fails if one
// never occurred: zero-valued inputs flagged at the West edge (clock-gated
// and bypassed in the PEs), weights sent inverted by the encoders, and
// unload cycles. It also checks on every cycle and column that at most 3 of
// the 7 coded fraction wires entering the array toggle, and reports the
// toggles on those wires with and without coding.
module tb_sa_env
  import lpsa_pkg::*;
  import bf16_ref_pkg::*;
#(
  parameter int unsigned ROWS  = 4,
  parameter int unsigned COLS  = 5,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned KMAX  = 64,
  parameter int unsigned TILES = 6,
  parameter int unsigned MAX_CYCLES = 200000,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned KW = $clog2(DEPTH + 1),
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1
) (
  output logic          clk,
  output logic          rst_n,
  output logic          in_wr_en,
  output logic [RW-1:0] in_wr_row,
  output logic [AW-1:0] in_wr_addr,
  output bf16_t         in_wr_data,
  output logic          wt_wr_en,
  output logic [CW-1:0] wt_wr_col,
  output logic [AW-1:0] wt_wr_addr,
  output bf16_t         wt_wr_data,
  output logic          start,
  output logic [KW-1:0] k_len,
  input  logic          busy,
  input  logic          done,
  output logic [RW-1:0] out_rd_row,
  output logic [CW-1:0] out_rd_col,
  input  bf16_t         out_rd_data,
  // probes into the array
  input  logic          mon_unload,
  input  logic          mon_zero_in [ROWS],
  input  wgt_t          mon_w_enc   [COLS],
  input  bf16_t         mon_w_raw   [COLS]
);

  int checks = 0, failures = 0, cycles = 0;
  int n_zero_in = 0, n_inv = 0, n_unload = 0;
  longint tog_coded = 0, tog_plain = 0;

  initial begin
    clk = 0; rst_n = 0; in_wr_en = 0; wt_wr_en = 0; start = 0;
    in_wr_row = '0; in_wr_addr = '0; in_wr_data = '0;
    wt_wr_col = '0; wt_wr_addr = '0; wt_wr_data = '0;
    k_len = '0; out_rd_row = '0; out_rd_col = '0;
  end

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == MAX_CYCLES);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism monitors.
  always @(posedge clk) if (rst_n && mon_unload) n_unload++;

  for (genvar r = 0; r < ROWS; r++) begin : g_mon_row
    always @(posedge clk) if (rst_n && mon_zero_in[r]) n_zero_in++;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_mon_col
    logic [6:0] prev_coded = '0, prev_plain = '0;
    logic       prev_inv = 1'b0;
    always @(posedge clk) begin
      if (rst_n) begin
        if (mon_w_enc[c].inv) n_inv++;
        if ($countones(mon_w_enc[c].data.man ^ prev_coded) > 3) begin
          failures++;
          $display("FAIL column %0d: more than 3 coded fraction toggles", c);
        end
        tog_coded += $countones(mon_w_enc[c].data.man ^ prev_coded)
                   + $countones(mon_w_enc[c].inv ^ prev_inv);
        tog_plain += $countones(mon_w_raw[c].man ^ prev_plain);
        prev_coded <= mon_w_enc[c].data.man;
        prev_inv   <= mon_w_enc[c].inv;
        prev_plain <= mon_w_raw[c].man;
      end
    end
  end

  bf16_t A [ROWS][DEPTH];
  bf16_t B [DEPTH][COLS];

  task automatic run_tile(int tile);
    int          K, zero_pct, t0, lat;
    logic [15:0] acc;
    K = (tile == 0) ? int'(KMAX) : 1 + int'($urandom % KMAX);
    case (tile)
      0: zero_pct = 50;
      1: zero_pct = 0;
      2: zero_pct = 90;
      default: zero_pct = int'($urandom % 101);
    endcase
    // Fill buffers through the host ports.
    for (int r = 0; r < int'(ROWS); r++)
      for (int k = 0; k < K; k++) begin
        if (int'($urandom % 100) < zero_pct) A[r][k] = ($urandom % 2 != 0) ? 16'h8000 : 16'h0000;
        else                                 A[r][k] = rand_bf16_mid();
        @(negedge clk);
        in_wr_en = 1; in_wr_row = RW'(r); in_wr_addr = AW'(k); in_wr_data = A[r][k];
      end
    for (int c = 0; c < int'(COLS); c++)
      for (int k = 0; k < K; k++) begin
        B[k][c] = ($urandom % 20 == 0) ? 16'h0000 : rand_bf16_mid();
        @(negedge clk);
        in_wr_en = 0;
        wt_wr_en = 1; wt_wr_col = CW'(c); wt_wr_addr = AW'(k); wt_wr_data = B[k][c];
      end
    @(negedge clk);
    in_wr_en = 0; wt_wr_en = 0;
    // Run the tile and time it.
    start = 1; k_len = KW'(K);
    t0 = cycles;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    lat = cycles - t0 - 1;   // edges after the one that samples start
    checks++;
    if (lat != K + 2 * int'(ROWS) + int'(COLS)) begin
      failures++;
      $display("FAIL tile %0d: done after %0d cycles, expected %0d", tile, lat, K + 2 * int'(ROWS) + int'(COLS));
    end
    // Read and compare every result.
    for (int r = 0; r < int'(ROWS); r++)
      for (int c = 0; c < int'(COLS); c++) begin
        acc = '0;
        for (int k = 0; k < K; k++)
          if ({A[r][k].exp, A[r][k].man} != '0) acc = ref_add(acc, ref_mul(A[r][k], B[k][c]));
        out_rd_row = RW'(r); out_rd_col = CW'(c);
        @(negedge clk);
        checks++;
        if (out_rd_data !== acc) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d C[%0d][%0d] = %h, expected %h", tile, r, c, out_rd_data, acc);
        end
      end
    $display("tile %0d: K=%0d zeros=%0d%% latency=%0d", tile, K, zero_pct, lat);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < int'(TILES); t++) run_tile(t);
    checks += 3;
    if (n_zero_in == 0) begin failures++; $display("FAIL zero-value gating never happened"); end
    if (n_inv == 0)     begin failures++; $display("FAIL bus-invert never inverted"); end
    if (n_unload == 0)  begin failures++; $display("FAIL unload never happened"); end
    $display("zero inputs gated=%0d inverted weights=%0d unload cycles=%0d", n_zero_in, n_inv, n_unload);
    $display("weight fraction toggles entering array: coded (incl. inv) %0d, uncoded %0d", tog_coded, tog_plain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
