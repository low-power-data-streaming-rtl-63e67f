// tb_zero_detector: exhaustive test of the zero detector. All 65536
// Bfloat16 encodings are applied; is_zero must be set exactly for +0
// (0x0000) and -0 (0x8000), and the value must be forwarded unchanged.
module tb_zero_detector;
  import lpsa_pkg::*;

  bf16_t a_in;
  act_t  a_out;
  int    checks = 0, failures = 0;

  zero_detector dut (.a_in, .a_out);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      a_in = 16'(i);
      #1;
      checks++;
      if (a_out.is_zero !== (i == 0 || i == 32768) || a_out.data !== 16'(i)) begin
        failures++;
        if (failures < 10) $display("FAIL %h: is_zero=%b data=%h", i, a_out.is_zero, a_out.data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
