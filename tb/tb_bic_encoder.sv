// tb_bic_encoder: self-checking test of the bus-invert encoder.
// A reference model keeps the fraction last put on the output register and
// decides inversion by counting differing bits ($countones > 3). Each cycle
// the test checks the registered output word and inv bit against the model,
// that XOR-ing the fraction with inv gives back the original weight, that
// sign and exponent pass uncoded, and that no more than 3 fraction wires
// toggle from one cycle to the next. Stimulus mixes random fractions with
// runs of complemented fractions so both inv values occur often.
module tb_bic_encoder;
  import lpsa_pkg::*;

  logic  clk = 0, rst_n = 0;
  bf16_t w_in;
  wgt_t  w_out;
  int    checks = 0, failures = 0, n_inv = 0, cycles = 0;

  bic_encoder dut (.clk, .rst_n, .w_in, .w_out);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h want %h", what, got, want);
    end
  endtask

  initial begin
    logic [6:0]  prev_man, m_ref;
    logic        inv_ref;
    bf16_t       x;
    w_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_eq(32'(w_out), 32'h0, "reset value");
    prev_man = '0;
    for (int i = 0; i < 5000; i++) begin
      x = 16'($urandom);
      if (i % 7 == 3) x.man = ~prev_man;             // all bits would flip
      if (i % 11 == 5) x.man = prev_man ^ 7'b0001111; // exactly 4 flips
      if (i % 13 == 2) x.man = prev_man ^ 7'b0000111; // exactly 3 flips
      w_in = x;
      inv_ref = ($countones(x.man ^ prev_man) > 3);
      m_ref   = inv_ref ? ~x.man : x.man;
      @(negedge clk);
      expect_eq(32'(w_out.inv), 32'(inv_ref), "inv");
      expect_eq(32'(w_out.data), 32'({x.sign, x.exp, m_ref}), "coded word");
      expect_eq(32'(w_out.data.man ^ {7{w_out.inv}}), 32'(x.man), "decoded fraction");
      checks++;
      if ($countones(w_out.data.man ^ prev_man) > 3) begin
        failures++;
        $display("FAIL more than 3 fraction toggles");
      end
      if (w_out.inv) n_inv++;
      prev_man = w_out.data.man;
    end
    checks++;
    if (n_inv == 0) begin
      failures++;
      $display("FAIL inversion never happened");
    end
    $display("inversions: %0d of 5000", n_inv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
