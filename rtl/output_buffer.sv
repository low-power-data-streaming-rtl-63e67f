// output_buffer: the Output Buffer on the South edge of the array.
//
// During unload the array presents one row of results per cycle on its
// South edge; the controller writes that row, all COLS words at once, into
// entry wr_row. A host reads the finished tile one word at a time.
//
// The paper names this buffer and its place; the row-wide write port and
// word-wide read port are this design's choices. Timing: write at the clock
// edge; synchronous read, rd_data one cycle after rd_row/rd_col.
module output_buffer
  import lpsa_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  bf16_t         wr_data [COLS],
  input  logic [RW-1:0] rd_row,
  input  logic [CW-1:0] rd_col,
  output bf16_t         rd_data
);

  bf16_t mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < int'(COLS); c++) mem[wr_row][c] <= wr_data[c];
    end
    rd_data <= mem[rd_row][rd_col];
  end

endmodule
