// tb_output_buffer: self-checking test of the output buffer at 4 x 3.
// Rows of random results are written in the unload order (last row first),
// then every word is read back with one cycle of latency and compared with
// a shadow copy; a second round overwrites the rows in random order.
module tb_output_buffer;
  import lpsa_pkg::*;

  localparam int ROWS = 4, COLS = 3;

  logic        clk = 0, wr_en = 0;
  logic [1:0]  wr_row = '0, rd_row = '0, rd_col = '0;
  bf16_t       wr_data [COLS];
  bf16_t       rd_data;
  int          checks = 0, failures = 0, cycles = 0;
  bf16_t       shadow [ROWS][COLS];

  output_buffer #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 2; round++) begin
      for (int i = 0; i < ROWS; i++) begin
        int r;
        r = (round == 0) ? ROWS - 1 - i : int'($urandom % ROWS);
        @(negedge clk);
        wr_en = 1;
        wr_row = 2'(r);
        for (int c = 0; c < COLS; c++) begin
          wr_data[c]   = 16'($urandom);
          shadow[r][c] = wr_data[c];
        end
      end
      @(negedge clk);
      wr_en = 0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          rd_row = 2'(r); rd_col = 2'(c);
          @(negedge clk);
          checks++;
          if (rd_data !== shadow[r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL [%0d][%0d]: got %h want %h", r, c, rd_data, shadow[r][c]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
