// tb_lp_pe: self-checking test of one low-power PE.
// Random activations (about 40 % zero, flagged through is_zero) and random
// weights, each sent with a random inv bit and its fraction XORed
// accordingly, are applied for many cycles, with unload pulses in between.
// A reference model built on bf16_ref_pkg tracks the accumulator (skip when
// is_zero, shift acc_in on unload) and the forwarded registers: the East
// value register must hold during zero inputs (clock gating), the is_zero
// flag and the coded weight with its inv bit must be forwarded unchanged.
// Counts of gated cycles, inverted weights and unloads must all be non-zero.
module tb_lp_pe;
  import lpsa_pkg::*;
  import bf16_ref_pkg::*;

  logic  clk = 0, rst_n = 0, unload = 0;
  act_t  a_in, a_out;
  wgt_t  w_in, w_out;
  bf16_t acc_in, acc_out;
  int    checks = 0, failures = 0, cycles = 0;
  int    n_gated = 0, n_inv = 0, n_unload = 0;

  lp_pe dut (.clk, .rst_n, .unload, .a_in, .w_in, .acc_in, .a_out, .w_out, .acc_out);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d: got %h want %h", what, cycles, got, want);
    end
  endtask

  initial begin
    logic [15:0] acc_ref, a_hold, wt;
    a_in = '{data: '0, is_zero: 1'b1};
    w_in = '0;
    acc_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    acc_ref = '0;
    a_hold  = '0;
    for (int i = 0; i <= 10000; i++) begin
      @(negedge clk);
      // outputs after the previous rising edge
      if (i > 0) begin
        expect_eq(32'(acc_out), 32'(acc_ref), "accumulator");
        expect_eq(32'(a_out.data), 32'(a_hold), "East value register");
        expect_eq(32'(a_out.is_zero), 32'(a_in.is_zero), "East is_zero");
        expect_eq(32'(w_out), 32'(w_in), "South coded weight");
      end
      // new stimulus
      unload = (i % 97 == 96);
      if ($urandom % 5 < 2) a_in.data = ($urandom % 2 != 0) ? 16'h8000 : 16'h0000;
      else                  a_in.data = rand_bf16_mid();
      a_in.is_zero = ({a_in.data.exp, a_in.data.man} == '0);
      wt = rand_bf16_mid();
      w_in.inv  = 1'($urandom);
      w_in.data = {wt[15:7], wt[6:0] ^ {7{w_in.inv}}};
      acc_in = rand_bf16_mid();
      // reference state after the coming rising edge
      if (unload) begin
        acc_ref = acc_in;
        n_unload++;
      end else if (!a_in.is_zero) begin
        acc_ref = ref_add(acc_ref, ref_mul(a_in.data, wt));
      end
      if (!a_in.is_zero) a_hold = a_in.data;
      else n_gated++;
      if (w_in.inv) n_inv++;
    end
    checks += 3;
    if (n_gated == 0)  begin failures++; $display("FAIL no gated cycle"); end
    if (n_inv == 0)    begin failures++; $display("FAIL no inverted weight"); end
    if (n_unload == 0) begin failures++; $display("FAIL no unload"); end
    $display("gated=%0d inverted=%0d unloads=%0d", n_gated, n_inv, n_unload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
