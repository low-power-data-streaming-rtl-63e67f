// tb_pe_array: self-checking test of the PE grid at 3 x 4. The testbench
// itself produces the skewed edge streams: at cycle t, row r receives
// A[r][t-r] and column c receives B[t-c][c], zero (flagged is_zero) outside
// the stream, with each weight sent under a random inv bit. After K+ROWS+COLS
// cycles unload is raised for ROWS cycles and the South edge must present
// C rows ROWS-1 down to 0, each equal to the Bfloat16 reference product.
// Three tiles run back to back, so the zero shifted in by unload must also
// leave the accumulators cleared. Zero activations make up about a third.
module tb_pe_array;
  import lpsa_pkg::*;
  import bf16_ref_pkg::*;

  localparam int ROWS = 3, COLS = 4, K = 20;

  logic  clk = 0, rst_n = 0, unload = 0;
  act_t  a_west    [ROWS];
  wgt_t  w_north   [COLS];
  bf16_t acc_south [COLS];
  int    checks = 0, failures = 0, cycles = 0;

  pe_array #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .unload, .a_west, .w_north, .acc_south);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bf16_t A [ROWS][K];
  bf16_t B [K][COLS];

  initial begin
    logic [15:0] acc;
    int          k;
    logic        inv;
    for (int r = 0; r < ROWS; r++) a_west[r] = '{data: '0, is_zero: 1'b1};
    for (int c = 0; c < COLS; c++) w_north[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 3; tile++) begin
      for (int r = 0; r < ROWS; r++)
        for (int kk = 0; kk < K; kk++)
          A[r][kk] = ($urandom % 3 == 0) ? 16'h0000 : rand_bf16_mid();
      for (int kk = 0; kk < K; kk++)
        for (int c = 0; c < COLS; c++) B[kk][c] = rand_bf16_mid();
      for (int t = 0; t < K + ROWS + COLS; t++) begin
        @(negedge clk);
        for (int r = 0; r < ROWS; r++) begin
          k = t - r;
          a_west[r].data    = (k >= 0 && k < K) ? A[r][k] : 16'h0000;
          a_west[r].is_zero = ({a_west[r].data.exp, a_west[r].data.man} == '0);
        end
        for (int c = 0; c < COLS; c++) begin
          k = t - c;
          inv = 1'($urandom);
          w_north[c].inv  = inv;
          w_north[c].data = (k >= 0 && k < K) ? B[k][c] : 16'h0000;
          w_north[c].data.man = w_north[c].data.man ^ {7{inv}};
        end
      end
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) a_west[r] = '{data: '0, is_zero: 1'b1};
      unload = 1;
      for (int u = 0; u < ROWS; u++) begin
        for (int c = 0; c < COLS; c++) begin
          acc = '0;
          for (int kk = 0; kk < K; kk++)
            if (A[ROWS-1-u][kk] != 16'h0000) acc = ref_add(acc, ref_mul(A[ROWS-1-u][kk], B[kk][c]));
          checks++;
          if (acc_south[c] !== acc) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d C[%0d][%0d] = %h, expected %h", tile, ROWS-1-u, c, acc_south[c], acc);
          end
        end
        @(negedge clk);
      end
      unload = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
