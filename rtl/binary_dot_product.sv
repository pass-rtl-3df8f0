// binary_dot_product: the synapse of one neuron.
//
// Each neighbour's binary state drives a 2:1 mux that passes that neighbour's
// signed 8-bit weight (state 1) or zero (state 0); a balanced adder tree sums
// the eight mux outputs and the bias is added last, as in the connection
// circuit of the paper. The block is purely combinational so the neuron array
// stays clock-free.
//
// The paper says the 7-bit answer goes to the DAC but not how the wider sum is
// reduced. Here the sum is saturated to the signed 8-bit range [-128, 127],
// offset by +128 and the LSB dropped, giving an offset-binary code 0..127 in
// which code 64 means a net input of zero. This keeps the whole bias range
// -127..+127 that the paper sweeps when characterising the sigmoid spread
// across the whole DAC range.
//
// Interface: nbr[k] selects w[k]; sum is the exact signed total (12 bits for
// the default sizes); code is the DAC code. No clock, no latency.
`timescale 1ps/1ps
module binary_dot_product #(
  parameter int unsigned NIN    = 8,
  parameter int unsigned WW     = 8,
  parameter int unsigned CODE_W = 7,
  localparam int unsigned SUM_W = WW + $clog2(NIN + 1) + 1
) (
  input  logic [NIN-1:0]                  nbr,
  input  logic [NIN-1:0][WW-1:0]          w,
  input  logic signed [WW-1:0]            bias,
  output logic signed [SUM_W-1:0]         sum,
  output logic [CODE_W-1:0]               code
);

  localparam logic signed [SUM_W-1:0] SAT_HI = SUM_W'((1 << (WW - 1)) - 1);
  localparam logic signed [SUM_W-1:0] SAT_LO = -SUM_W'(1 << (WW - 1));

  logic signed [SUM_W-1:0] masked [NIN];
  logic signed [SUM_W-1:0] sat;
  logic        [WW-1:0]    offs;

  // Binary multiply: mux between the weight and zero.
  always_comb begin
    for (int k = 0; k < NIN; k++)
      masked[k] = nbr[k] ? SUM_W'(signed'(w[k])) : '0;
  end

  // Adder tree over the masked weights, then the bias.
  function automatic logic signed [SUM_W-1:0] tree_sum(input logic signed [SUM_W-1:0] v [NIN]);
    logic signed [SUM_W-1:0] t [NIN];
    int n;
    t = v;
    n = NIN;
    while (n > 1) begin
      for (int i = 0; i < n / 2; i++)
        t[i] = t[2*i] + t[2*i+1];
      if (n % 2 == 1)
        t[n/2] = t[n-1];
      n = (n + 1) / 2;
    end
    return t[0];
  endfunction

  always_comb begin
    sum = tree_sum(masked) + SUM_W'(bias);
    if (sum > SAT_HI)      sat = SAT_HI;
    else if (sum < SAT_LO) sat = SAT_LO;
    else                   sat = sum;
    offs = WW'(sat) ^ {1'b1, {(WW-1){1'b0}}};   // +2^(WW-1): offset binary
    code = offs[WW-1 -: CODE_W];
  end

endmodule
