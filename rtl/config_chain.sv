// config_chain: the chip-wide configuration shift chain.
//
// Every programmable bit of the chip sits in one long shift register clocked
// by the slow configuration clock (1 MHz on the chip): for each neuron the
// 74-bit record of pass_pkg::neuron_cfg_t (eight 8-bit weights, an 8-bit bias
// and two clamp bits), then sixteen 7-bit amplifier trims, sixteen 7-bit
// sigmoid trims and the 3-bit sampling setting. Its length and contents follow
// the paper; the order of the fields along the chain is this design's choice.
//
// Layout, from the end of the chain (bit 0, nearest sout) to its head:
//   neuron 0 .. neuron ROWS*COLS-1 (neuron n = row*COLS + col, 74 bits each),
//   amp_trim[0..NTRIM-1], sig_trim[0..NTRIM-1], samp_cfg.
// While shift_en is high each clk edge moves the chain one place towards bit 0
// and loads sin at the head, so a host sends the chain image LSB first and
// after CHAIN_LEN edges bit i of the image sits in chain bit i. The outputs
// are the register contents directly: the weights are stationary while the
// neurons compute and change only while the host shifts. There is no reset;
// the host loads the full chain before computing.
`timescale 1ps/1ps
module config_chain
  import pass_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned NTRIM = 16,
  localparam int unsigned NN        = ROWS * COLS,
  localparam int unsigned CHAIN_LEN = NN * NCFG_BITS + 2 * NTRIM * TRIM_W + SCFG_W
) (
  input  logic                     clk,
  input  logic                     shift_en,
  input  logic                     sin,
  output logic                     sout,
  output neuron_cfg_t [NN-1:0]     ncfg,
  output trim_t [NTRIM-1:0]        amp_trim,
  output trim_t [NTRIM-1:0]        sig_trim,
  output logic [SCFG_W-1:0]        samp_cfg
);

  typedef struct packed {
    logic [SCFG_W-1:0]      samp_cfg;
    trim_t [NTRIM-1:0]      sig_trim;
    trim_t [NTRIM-1:0]      amp_trim;
    neuron_cfg_t [NN-1:0]   ncfg;
  } chain_t;

  chain_t chain;

  always_ff @(posedge clk)
    if (shift_en)
      chain <= {sin, chain[CHAIN_LEN-1:1]};

  assign sout     = chain[0];
  assign ncfg     = chain.ncfg;
  assign amp_trim = chain.amp_trim;
  assign sig_trim = chain.sig_trim;
  assign samp_cfg = chain.samp_cfg;

endmodule
