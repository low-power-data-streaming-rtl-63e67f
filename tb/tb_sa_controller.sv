// tb_sa_controller: cycle-exact test of the tile sequencer at 3 rows x 4
// columns with 16-word banks. For several tiles with random K it follows
// every cycle from the clock edge that samples start (edge j = 0) and checks
// all outputs against the schedule worked out by hand:
//   j = 0 .. K+R+C-1        compute, t = j: weight bank c enabled with
//                           address t-c, input bank r with t-r-1, when the
//                           address lies in 0..K-1;
//   j = K+R+C .. K+2R+C-1   unload, output row R-1-(j-K-R-C) written;
//   j = K+2R+C              done for one cycle, then idle.
// busy must be high throughout. A start pulse in the middle of a tile must
// be ignored.
module tb_sa_controller;
  localparam int ROWS = 3, COLS = 4, DEPTH = 16;

  logic        clk = 0, rst_n = 0, start = 0;
  logic [4:0]  k_len = '0;
  logic        busy, done, unload, o_wr_en;
  logic        w_rd_en   [COLS];
  logic [3:0]  w_rd_addr [COLS];
  logic        a_rd_en   [ROWS];
  logic [3:0]  a_rd_addr [ROWS];
  logic [1:0]  o_wr_row;
  int          checks = 0, failures = 0, cycles = 0;

  sa_controller #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(int got, int want, string what, int j);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 15) $display("FAIL %s at j=%0d: got %0d want %0d", what, j, got, want);
    end
  endtask

  initial begin
    int K, last;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq(int'(busy), 0, "idle busy", -1);
    for (int tile = 0; tile < 6; tile++) begin
      K = (tile == 0) ? DEPTH : (tile == 1 ? 1 : 1 + int'($urandom % DEPTH));
      last = K + 2 * ROWS + COLS;
      start = 1;
      k_len = 5'(K);
      for (int j = 0; j <= last + 1; j++) begin
        @(negedge clk);
        start = (j == 5);   // must be ignored
        if (j <= last) begin
          expect_eq(int'(busy), 1, "busy", j);
          expect_eq(int'(done), int'(j == last), "done", j);
          for (int c = 0; c < COLS; c++) begin
            int k;
            bit en;
            k  = j - c;
            en = (j < K + ROWS + COLS) && k >= 0 && k < K;
            expect_eq(int'(w_rd_en[c]), int'(en), "w_rd_en", j);
            if (en) expect_eq(int'(w_rd_addr[c]), k, "w_rd_addr", j);
          end
          for (int r = 0; r < ROWS; r++) begin
            int k;
            bit en;
            k  = j - r - 1;
            en = (j < K + ROWS + COLS) && k >= 0 && k < K;
            expect_eq(int'(a_rd_en[r]), int'(en), "a_rd_en", j);
            if (en) expect_eq(int'(a_rd_addr[r]), k, "a_rd_addr", j);
          end
          expect_eq(int'(unload), int'(j >= K + ROWS + COLS && j < last), "unload", j);
          expect_eq(int'(o_wr_en), int'(j >= K + ROWS + COLS && j < last), "o_wr_en", j);
          if (o_wr_en) expect_eq(int'(o_wr_row), ROWS - 1 - (j - K - ROWS - COLS), "o_wr_row", j);
        end else begin
          expect_eq(int'(busy), 0, "busy after done", j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
