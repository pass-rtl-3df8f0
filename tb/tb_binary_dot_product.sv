// tb_binary_dot_product: self-checking test of the synapse.
//
// Drives directed corner cases (all masks off, all weights +127 or -128 with
// every neighbour on, saturation at both ends) and 5000 random vectors, and
// compares sum and code with a reference written with plain integers:
// sum = bias + sum of w[k] over the neighbours that are 1, code =
// (clip(sum, -128, 127) + 128) >> 1.
`timescale 1ps/1ps
module tb_binary_dot_product;

  logic [7:0]            nbr;
  logic [7:0][7:0]       w;
  logic signed [7:0]     bias;
  logic signed [12:0]    sum;
  logic [6:0]            code;
  int checks = 0, failures = 0;

  binary_dot_product dut (.nbr(nbr), .w(w), .bias(bias), .sum(sum), .code(code));

  task automatic check_vec();
    int ref_sum, ref_sat, ref_code;
    #1;
    ref_sum = int'(bias);
    for (int k = 0; k < 8; k++) if (nbr[k]) ref_sum += int'($signed(w[k]));
    ref_sat  = ref_sum > 127 ? 127 : (ref_sum < -128 ? -128 : ref_sum);
    ref_code = (ref_sat + 128) >> 1;
    checks += 2;
    if (int'(sum) != ref_sum) begin
      failures++;
      $display("FAIL sum nbr=%b bias=%0d got %0d exp %0d", nbr, bias, sum, ref_sum);
    end
    if (int'(code) != ref_code) begin
      failures++;
      $display("FAIL code nbr=%b got %0d exp %0d", nbr, code, ref_code);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Nothing on: code is mid-scale.
    nbr = '0; w = '0; bias = '0; check_vec();
    if (code !== 7'd64) failures++;
    checks++;
    // All weights +127, all neighbours on: positive saturation.
    nbr = '1; for (int k = 0; k < 8; k++) w[k] = 8'sd127; bias = 8'sd127; check_vec();
    // All weights -128: negative saturation.
    for (int k = 0; k < 8; k++) w[k] = 8'h80; bias = -8'sd128; check_vec();
    // Masks: weights present but neighbours off.
    nbr = '0; bias = 8'sd10; check_vec();
    // One neighbour at a time.
    for (int k = 0; k < 8; k++) begin
      nbr = 8'(1 << k); w = '0; w[k] = 8'(k * 13 - 50); bias = -8'sd3; check_vec();
    end
    for (int i = 0; i < 5000; i++) begin
      nbr = 8'($urandom);
      for (int k = 0; k < 8; k++) w[k] = 8'($urandom);
      bias = 8'($urandom);
      if (i % 4 == 0) for (int k = 0; k < 8; k++) w[k] = 8'($urandom_range(40, 0)) - 8'd20;
      check_vec();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
