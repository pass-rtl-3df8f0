// tb_neuron_core: wiring and coupling test of a 4 x 4 array.
//
// Wiring: for target cells in the interior, on an edge and in a corner, and
// for every direction k, all other cells are clamped to 0 except the cell in
// direction k, clamped to 1. The target has bias -64, weight +127 on input k
// and -128 on the other seven inputs, so it is mostly 1 only if input k is
// wired to the cell in direction k (p about 0.98 against 0.02). Where the
// direction leaves the array the target must stay mostly 0.
// Coupling: two free cells side by side with weights +127/-64 bias agree most
// of the time (ferromagnetic); with -128/+64 they disagree (antiferromagnetic).
`timescale 1ps/1ps
module tb_neuron_core;
  import pass_pkg::*;

  localparam int ROWS = 4, COLS = 4, NN = 16;
  neuron_cfg_t [NN-1:0] ncfg;
  trim_t [15:0]         amp_trim, sig_trim;
  logic                 az_rst;
  logic [NN-1:0]        state;
  int checks = 0, failures = 0;

  neuron_core #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  task automatic all_clamped0();
    for (int n = 0; n < NN; n++) begin
      ncfg[n] = '0;
      ncfg[n].clamp = '{en: 1'b1, val: 1'b0};
    end
  endtask

  task automatic frac(input int a, input int b, input real us, output real f_one, output real f_eq);
    int ones = 0, eq = 0, n = 0;
    for (int i = 0; i < int'(us * 1000.0); i++) begin
      #1000; n++;
      if (state[a]) ones++;
      if (state[a] == state[b]) eq++;
    end
    f_one = real'(ones) / n;
    f_eq  = real'(eq) / n;
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  real f1, feq;

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int targets [4][2] = '{'{1, 1}, '{2, 2}, '{0, 0}, '{3, 2}};
    for (int t = 0; t < 16; t++) begin amp_trim[t] = 7'd127; sig_trim[t] = 7'd127; end
    az_rst = 1'b1;
    all_clamped0();
    #10000 az_rst = 1'b0;
    foreach (targets[i]) begin
      for (int k = 0; k < 8; k++) begin
        int r, c, rr, cc, tn;
        bit in_arr;
        r = targets[i][0]; c = targets[i][1]; tn = r * COLS + c;
        rr = r + nbr_dr(k); cc = c + nbr_dc(k);
        in_arr = rr >= 0 && rr < ROWS && cc >= 0 && cc < COLS;
        all_clamped0();
        ncfg[tn].clamp = '{en: 1'b0, val: 1'b0};
        ncfg[tn].bias = -8'sd64;
        for (int j = 0; j < 8; j++) ncfg[tn].w[j] = (j == k) ? 8'sd127 : 8'h80;
        if (in_arr) ncfg[rr * COLS + cc].clamp = '{en: 1'b1, val: 1'b1};
        #50000;
        frac(tn, tn, 5.0, f1, feq);
        if (in_arr) check(f1 > 0.9, $sformatf("cell (%0d,%0d) dir %0d: p=%f, expected high", r, c, k, f1));
        else        check(f1 < 0.1, $sformatf("cell (%0d,%0d) dir %0d off-array: p=%f, expected low", r, c, k, f1));
      end
    end
    // Ferromagnetic pair: cells 5 (1,1) and 6 (1,2); 6 is east (k=2) of 5.
    all_clamped0();
    ncfg[5].clamp = '0; ncfg[6].clamp = '0;
    ncfg[5].w[2] = 8'sd127; ncfg[5].bias = -8'sd64;
    ncfg[6].w[6] = 8'sd127; ncfg[6].bias = -8'sd64;
    #50000; frac(5, 6, 20.0, f1, feq);
    $display("ferromagnetic pair agree %f", feq);
    check(feq > 0.9, "ferromagnetic pair agree");
    ncfg[5].w[2] = 8'h80; ncfg[5].bias = 8'sd64;
    ncfg[6].w[6] = 8'h80; ncfg[6].bias = 8'sd64;
    #50000; frac(5, 6, 20.0, f1, feq);
    $display("antiferromagnetic pair agree %f", feq);
    check(feq < 0.1, "antiferromagnetic pair disagree");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
