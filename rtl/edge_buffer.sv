// edge_buffer: banked local memory that feeds one edge of the array; used
// as the Weight Buffer (North edge, one bank per column) and as the Input
// Buffer (West edge, one bank per row).
//
// Bank b holds the stream for row/column b: word k is the k-th element of
// that stream (B[k][b] for weights, A[b][k] for inputs). A host loads words
// through a single write port. Every bank has its own read port so that the
// controller can read the banks with the skew the systolic dataflow needs.
// A bank whose rd_en is low returns zero, which is the padding the array
// sees before and after a stream; on the input side that padding is caught
// by the zero detectors and costs no switching inside the array.
//
// The paper names these buffers and their place at the array edges but not
// their organisation or size; banking, the zero padding and DEPTH are this
// design's choices (DEPTH = 4608 holds the longest reduction of ResNet-50,
// a 3x3 convolution over 512 channels). Timing: synchronous read, data one
// cycle after rd_en/rd_addr; write takes effect at the clock edge.
module edge_buffer
  import lpsa_pkg::*;
#(
  parameter int unsigned BANKS = 16,
  parameter int unsigned DEPTH = 4608,
  localparam int unsigned BW   = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // host write port
  input  logic          wr_en,
  input  logic [BW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  bf16_t         wr_data,
  // one read port per bank
  input  logic          rd_en   [BANKS],
  input  logic [AW-1:0] rd_addr [BANKS],
  output bf16_t         rd_data [BANKS]
);

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    bf16_t mem [DEPTH];
    bf16_t q;

    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == BW'(b)) begin
        mem[wr_addr] <= wr_data;
      end
    end

    always_ff @(posedge clk) begin
      q <= mem[rd_addr[b]];
    end

    logic en_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) en_q <= 1'b0;
      else        en_q <= rd_en[b];
    end

    assign rd_data[b] = en_q ? q : '0;
  end

endmodule
