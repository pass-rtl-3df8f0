// c2c_dac: behavioural model of the 7-bit C-2C charge-scaling DAC.
//
// This is a behavioural model of an analog block, not synthesizable logic. On
// the chip a ladder of C and 2C capacitors, driven by inverters on each code
// bit, divides the reference so that bit i contributes VREF * 2^i / 2^BITS to
// the output node; the paper gives the topology and the 7-bit width. The model
// computes that ideal ladder output as a real voltage. The output follows the
// code after DELAY_PS, a pure transport delay that stands for the whole
// neighbour-to-neuron path: the paper measures a median of about 2 ns from a
// neighbour's flip to the neuron's input through the adder logic and the DAC
// (the DAC bits themselves switch in under 10 ps), and notes that this delay,
// a third of the 6.7 ns mean flip interval, skews the sampled distribution.
// Placing the whole delay here is this design's choice. Charge leakage from the output node, which limits
// how long a computation stays valid on silicon, is not modelled. VREF is the
// nominal 0.8 V supply of the paper.
`timescale 1ps/1ps
module c2c_dac #(
  parameter int unsigned BITS = 7,
  parameter real         VREF = 0.8,
  parameter int unsigned DELAY_PS = 2000
) (
  input  logic [BITS-1:0] code,
  output real             vout
);

  // Superposition of the ladder: each bit adds VREF * 2^i / 2^BITS.
  function automatic real ladder(input logic [BITS-1:0] c);
    real v;
    v = 0.0;
    for (int i = 0; i < BITS; i++)
      if (c[i]) v += VREF * (2.0 ** i) / (2.0 ** BITS);
    return v;
  endfunction

  real vnow;

  always_comb vnow = ladder(code);

  // Transport delay: every change of the ideal value reappears DELAY_PS later.
  initial vout = 0.0;
  always @(vnow) vout <= #(DELAY_PS) vnow;

endmodule
