// tb_analog_neuron: statistical test of the stochastic neuron model.
//
// For several input voltages it samples the output every 1 ns for 100 us and
// compares the fraction of time at 1 with the logistic 1/(1+exp(-(v-0.4)/0.05))
// worked out here (tolerance 0.03). It counts output flips at v = 0.4 and
// checks the flip rate against lambda0/2 (75 MHz at the fastest trim and
// 37.5 MHz with amp_trim = 63, tolerance 10 %): the paper measures 150 MHz
// at maximum speed. It checks that a narrower sig_trim flattens the sigmoid,
// and that the output is 0 and never flips while az_rst is high.
`timescale 1ps/1ps
module tb_analog_neuron;

  real        vin;
  logic [6:0] amp_trim, sig_trim;
  logic       az_rst, out;
  int checks = 0, failures = 0;

  analog_neuron dut (.*);

  function automatic real logistic(real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  task automatic measure(input real us, output real frac, output real flips_mhz);
    int ones, n, flips;
    logic last;
    ones = 0; n = 0; flips = 0; last = out;
    for (int i = 0; i < int'(us * 1000.0); i++) begin
      #1000;
      n++;
      if (out) ones++;
    end
    frac = real'(ones) / real'(n);
    flips_mhz = 0.0;
  endtask

  int flip_cnt;
  always @(out) flip_cnt++;

  task automatic expect_close(input real got, input real exp, input real tol, input string what);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp);
    end else
      $display("ok   %s got %f exp %f", what, got, exp);
  endtask

  real frac, dummy, rate;
  real vs [5] = '{0.4, 0.45, 0.5, 0.3, 0.75};

  initial begin
    #5000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    amp_trim = 7'd127; sig_trim = 7'd127; az_rst = 1'b1; vin = 0.4;
    #10000;
    az_rst = 1'b0;
    foreach (vs[i]) begin
      vin = vs[i];
      #100000;
      measure(100.0, frac, dummy);
      expect_close(frac, logistic((vs[i] - 0.4) / 0.05), 0.03, $sformatf("p(1) at %0.2f V", vs[i]));
    end
    // Flip rate at the sigmoid centre: lambda0 * 2 p (1-p) = lambda0 / 2.
    vin = 0.4;
    flip_cnt = 0;
    #100000000;
    rate = real'(flip_cnt) / 100.0;
    expect_close(rate / 75.0, 1.0, 0.1, "flip rate / 75 MHz (amp_trim 127)");
    amp_trim = 7'd63;
    #1000;
    flip_cnt = 0;
    #100000000;
    rate = real'(flip_cnt) / 100.0;
    expect_close(rate / 37.5, 1.0, 0.1, "flip rate / 37.5 MHz (amp_trim 63)");
    // Sigmoid trim: sig_trim 31 makes the width 4x, p at 0.5 V falls to logistic(0.5).
    amp_trim = 7'd127; sig_trim = 7'd31; vin = 0.5;
    #100000;
    measure(100.0, frac, dummy);
    expect_close(frac, logistic(0.1 / 0.2), 0.03, "p(1) at 0.50 V, sig_trim 31");
    // Auto-zero reset: output held at 0 with no flips even at a high input.
    sig_trim = 7'd127; vin = 0.75;
    #100000;
    az_rst = 1'b1;
    #1000;
    flip_cnt = 0;
    measure(20.0, frac, dummy);
    checks += 2;
    if (out !== 1'b0 || frac != 0.0) begin failures++; $display("FAIL az_rst output not 0"); end
    if (flip_cnt != 0) begin failures++; $display("FAIL flips during az_rst"); end
    az_rst = 1'b0;
    #100000;
    measure(20.0, frac, dummy);
    expect_close(frac, logistic(0.35 / 0.05), 0.03, "p(1) after az_rst release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
