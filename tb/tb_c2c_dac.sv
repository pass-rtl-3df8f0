// tb_c2c_dac: sweeps all 128 codes of the DAC model and checks
// vout = 0.8 V * code / 128 within 1 uV, that the output is monotonic, and
// that a new code reaches the output only after the 2 ns transport delay
// (the old voltage is still there 1.9 ns after the change).
`timescale 1ps/1ps
module tb_c2c_dac;

  logic [6:0] code;
  real vout, prev;
  int checks = 0, failures = 0;

  c2c_dac dut (.code(code), .vout(vout));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prev = -1.0;
    for (int c = 0; c < 128; c++) begin
      code = 7'(c);
      #1900;
      checks++;
      if (c > 0 && vout != prev) begin
        failures++;
        $display("FAIL code %0d reached the output before the delay", c);
      end
      #200;
      checks += 2;
      if (vout - 0.8 * c / 128.0 > 1e-6 || 0.8 * c / 128.0 - vout > 1e-6) begin
        failures++;
        $display("FAIL code %0d vout %f", c, vout);
      end
      if (!(vout > prev)) begin
        failures++;
        $display("FAIL not monotonic at %0d", c);
      end
      prev = vout;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
