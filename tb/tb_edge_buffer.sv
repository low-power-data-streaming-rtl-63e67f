// tb_edge_buffer: self-checking test of the banked edge buffer at 4 banks x
// 32 words. Every word of every bank is written with random data through
// the host port, then for many cycles every bank is read at an independent
// random address with a random enable. One cycle later each bank must show
// the stored word if it was enabled and zero if not. A shadow array in the
// testbench is the reference; writes during reads are also exercised.
module tb_edge_buffer;
  import lpsa_pkg::*;

  localparam int BANKS = 4, DEPTH = 32;

  logic        clk = 0, rst_n = 0, wr_en = 0;
  logic [1:0]  wr_bank = '0;
  logic [4:0]  wr_addr = '0;
  bf16_t       wr_data = '0;
  logic        rd_en   [BANKS];
  logic [4:0]  rd_addr [BANKS];
  bf16_t       rd_data [BANKS];
  int          checks = 0, failures = 0, cycles = 0;
  bf16_t       shadow [BANKS][DEPTH];

  edge_buffer #(.BANKS(BANKS), .DEPTH(DEPTH)) dut (.*);

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
    bf16_t expd [BANKS];
    for (int b = 0; b < BANKS; b++) begin rd_en[b] = 0; rd_addr[b] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < BANKS; b++)
      for (int a = 0; a < DEPTH; a++) begin
        shadow[b][a] = 16'($urandom);
        wr_en = 1; wr_bank = 2'(b); wr_addr = 5'(a); wr_data = shadow[b][a];
        @(negedge clk);
      end
    wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      for (int b = 0; b < BANKS; b++) begin
        rd_en[b]   = 1'($urandom);
        rd_addr[b] = 5'($urandom);
        expd[b]    = rd_en[b] ? shadow[b][rd_addr[b]] : 16'h0000;
      end
      // an occasional write to a word not being read this cycle
      wr_en   = ($urandom % 4 == 0);
      wr_bank = 2'($urandom);
      wr_addr = 5'($urandom);
      wr_data = 16'($urandom);
      if (wr_en && rd_addr[wr_bank] == wr_addr) wr_en = 0;
      if (wr_en) shadow[wr_bank][wr_addr] = wr_data;
      @(negedge clk);
      wr_en = 0;
      for (int b = 0; b < BANKS; b++) begin
        checks++;
        if (rd_data[b] !== expd[b]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d: got %h want %h", b, rd_data[b], expd[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
