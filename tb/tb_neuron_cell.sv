// tb_neuron_cell: end-to-end test of one neuron with its synapse.
//
// Checks the two clamp settings (output pinned to 1 and to 0 whatever the
// input), that a bias of +127 or -128 drives the output to nearly always 1 or
// 0, that a weight of +100 matters only while its neighbour is 1 (p(1) about
// 0.5 with the neighbour at 0, above 0.97 with it at 1), and that a negative
// weight pulls the output down. Probabilities come from sampling every 1 ns
// over 20 us; the expected values follow from code = (sum + 128) >> 1,
// v = 0.8 * code / 128 and p = 1/(1+exp(-(v-0.4)/0.05)).
`timescale 1ps/1ps
module tb_neuron_cell;
  import pass_pkg::*;

  logic [7:0]   nbr;
  neuron_cfg_t  cfg;
  trim_t        amp_trim, sig_trim;
  logic         az_rst, out;
  int checks = 0, failures = 0;

  neuron_cell dut (.*);

  function automatic real p_of_sum(int s);
    int sat, code;
    real v;
    sat = s > 127 ? 127 : (s < -128 ? -128 : s);
    code = (sat + 128) >> 1;
    v = 0.8 * code / 128.0;
    return 1.0 / (1.0 + $exp(-(v - 0.4) / 0.05));
  endfunction

  task automatic frac_one(input real us, output real f);
    int ones = 0, n = 0;
    for (int i = 0; i < int'(us * 1000.0); i++) begin
      #1000; n++; if (out) ones++;
    end
    f = real'(ones) / real'(n);
  endtask

  task automatic expect_close(input real got, input real exp, input real tol, input string what);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp);
    end else
      $display("ok   %s got %f exp %f", what, got, exp);
  endtask

  real f;

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    amp_trim = 7'd127; sig_trim = 7'd127; az_rst = 1'b0;
    nbr = '0; cfg = '0;
    // Clamp to 1 with a strongly negative input.
    cfg.bias = -8'sd128; cfg.clamp = '{en: 1'b1, val: 1'b1};
    #1000; frac_one(5.0, f); expect_close(f, 1.0, 0.0, "clamp to 1");
    // Clamp to 0 with a strongly positive input.
    cfg.bias = 8'sd127; cfg.clamp = '{en: 1'b1, val: 1'b0};
    #1000; frac_one(5.0, f); expect_close(f, 0.0, 0.0, "clamp to 0");
    // Free running, bias only.
    cfg.clamp = '{en: 1'b0, val: 1'b0};
    #100000; frac_one(20.0, f); expect_close(f, p_of_sum(127), 0.02, "bias +127");
    cfg.bias = -8'sd128;
    #100000; frac_one(20.0, f); expect_close(f, p_of_sum(-128), 0.02, "bias -128");
    // Weight on neighbour 2 (east) only matters when that neighbour is 1.
    cfg.bias = 8'sd0; cfg.w[2] = 8'sd100;
    nbr = 8'b0000_0000;
    #100000; frac_one(20.0, f); expect_close(f, p_of_sum(0), 0.04, "w=+100, neighbour off");
    nbr = 8'b0000_0100;
    #100000; frac_one(20.0, f); expect_close(f, p_of_sum(100), 0.02, "w=+100, neighbour on");
    nbr = 8'b1111_1011;
    #100000; frac_one(20.0, f); expect_close(f, p_of_sum(0), 0.04, "w=+100, other neighbours on");
    cfg.w[6] = -8'sd60; nbr = 8'b0100_0100;
    #100000; frac_one(20.0, f); expect_close(f, p_of_sum(40), 0.04, "w=+100 and w=-60 on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
