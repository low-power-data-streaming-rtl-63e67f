// sa_controller: sequences one output-stationary tile C = A x B through the
// array: a compute phase that streams both operands with the systolic skew,
// then an unload phase that shifts the results into the output buffer.
//
// The paper shows the skewed output-stationary dataflow (row r of A and
// column c of B each start one cycle later than row/column r-1 / c-1) and
// says results are unloaded separately once computation ends; the counters,
// phase lengths and handshake below are this design's own.
//
// Compute phase, cycles t = 0 .. K+ROWS+COLS-1 after start:
//   weight bank c reads word k = t - c   (when 0 <= k < K), and
//   input  bank r reads word k = t - r - 1.
// Weights pass a buffer read and the encoder register (2 cycles) before
// reaching row 0; inputs pass a buffer read only (1 cycle) before column 0,
// hence the extra cycle on the input side. B[k][c] then meets A[r][k] in
// PE (r,c) at cycle k + r + c + 2, and the last product lands in the
// bottom-right accumulator at the end of cycle K + ROWS + COLS - 1.
// Unload phase, ROWS cycles u = 0 .. ROWS-1: unload is high and the South
// edge, which shows original row ROWS-1-u, is written to output row
// ROWS-1-u. done pulses for one cycle after the last write; busy is high
// from the cycle after start until done. start is ignored while busy.
// done is high K + 2*ROWS + COLS clock edges after the edge that samples
// start.
module sa_controller
  import lpsa_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned DEPTH = 4608,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned KW   = $clog2(DEPTH + 1),
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned TW   = $clog2(DEPTH + ROWS + COLS + 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [KW-1:0] k_len,     // reduction length K, 1 .. DEPTH
  output logic          busy,
  output logic          done,
  output logic          w_rd_en   [COLS],
  output logic [AW-1:0] w_rd_addr [COLS],
  output logic          a_rd_en   [ROWS],
  output logic [AW-1:0] a_rd_addr [ROWS],
  output logic          unload,
  output logic          o_wr_en,
  output logic [RW-1:0] o_wr_row
);

  typedef enum logic [1:0] {S_IDLE, S_COMPUTE, S_UNLOAD, S_DONE} state_t;

  state_t        state;
  logic [TW-1:0] t;
  logic [KW-1:0] k_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t     <= '0;
      k_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          t <= '0;
          if (start) begin
            k_q   <= k_len;
            state <= S_COMPUTE;
          end
        end
        S_COMPUTE: begin
          if (t == TW'(k_q) + TW'(ROWS + COLS - 1)) begin
            t     <= '0;
            state <= S_UNLOAD;
          end else begin
            t <= t + 1'b1;
          end
        end
        S_UNLOAD: begin
          if (t == TW'(ROWS - 1)) begin
            t     <= '0;
            state <= S_DONE;
          end else begin
            t <= t + 1'b1;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int c = 0; c < int'(COLS); c++) begin
      logic signed [TW+1:0] k;
      k = $signed({2'b00, t}) - (TW+2)'(c);
      w_rd_en[c]   = (state == S_COMPUTE) && (k >= 0) && (k < $signed({2'b00, TW'(k_q)}));
      w_rd_addr[c] = AW'(k);
    end
    for (int r = 0; r < int'(ROWS); r++) begin
      logic signed [TW+1:0] k;
      k = $signed({2'b00, t}) - (TW+2)'(r + 1);
      a_rd_en[r]   = (state == S_COMPUTE) && (k >= 0) && (k < $signed({2'b00, TW'(k_q)}));
      a_rd_addr[r] = AW'(k);
    end
    unload   = (state == S_UNLOAD);
    o_wr_en  = (state == S_UNLOAD);
    o_wr_row = RW'(ROWS - 1) - RW'(t);
    busy     = (state != S_IDLE);
    done     = (state == S_DONE);
  end

endmodule
