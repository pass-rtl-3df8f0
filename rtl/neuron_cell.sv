// neuron_cell: one PASS neuron with its connection circuit.
//
// The cell follows the paper's split into a connection circuit and a neuron
// circuit. The binary dot product masks the eight neighbour weights with the
// neighbour states and adds the bias; the C-2C DAC turns the 7-bit result into
// the input voltage of the analog neuron, whose output flips at random times
// with a probability set by that voltage. The two clamp bits of the neuron's
// configuration record can force the cell output to 0 or 1, which the paper
// uses to condition the sampled distribution (image reconstruction); the clamp
// is placed after the analog neuron here, so a clamped cell drives its fixed
// value to its neighbours and to the sampler.
//
// Interface: nbr are the neighbour outputs in pass_pkg order, cfg the 74-bit
// record, amp_trim/sig_trim the trims of the cell's group, az_rst the
// auto-zero reset. out is asynchronous; the cell has no clock. The analog
// parts are behavioural models, so the cell simulates but only the dot
// product and clamp are synthesizable.
`timescale 1ps/1ps
module neuron_cell
  import pass_pkg::*;
(
  input  logic [NNBR-1:0]  nbr,
  input  neuron_cfg_t      cfg,
  input  trim_t            amp_trim,
  input  trim_t            sig_trim,
  input  logic             az_rst,
  output logic             out
);

  logic [CODE_W-1:0] code;
  logic signed [WW+4:0] sum;
  real   vin;
  logic  raw;

  binary_dot_product #(.NIN(NNBR), .WW(WW), .CODE_W(CODE_W)) u_bdp (
    .nbr  (nbr),
    .w    (cfg.w),
    .bias (cfg.bias),
    .sum  (sum),
    .code (code)
  );

  c2c_dac #(.BITS(CODE_W)) u_dac (
    .code (code),
    .vout (vin)
  );

  analog_neuron u_an (
    .vin      (vin),
    .amp_trim (amp_trim),
    .sig_trim (sig_trim),
    .az_rst   (az_rst),
    .out      (raw)
  );

  always_comb out = cfg.clamp.en ? cfg.clamp.val : raw;

endmodule
