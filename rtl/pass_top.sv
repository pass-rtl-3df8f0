// pass_top: the PASS chip, a parallel asynchronous stochastic sampler.
//
// A ROWS x COLS array of stochastic binary neurons (neuron_core) samples from
// a Boltzmann distribution over the king's-move graph. Weights, biases, clamps,
// trims and the sampling setting sit in one configuration shift chain
// (config_chain) loaded over cfg_in on the slow cfg_clk. The free-running
// neuron outputs are captured by the state sampler on samp_clk into the sample
// buffer (sample_sram), one 17-bit row word per cycle, and the buffer is then
// shifted out on one pin (gpio_out) by the readout on io_clk. az_rst is the
// auto-zero reset broadcast to all neurons before a computation.
//
// Clock domains: cfg_clk (1 MHz on the chip), samp_clk (300 MHz), io_clk
// (20 MHz) and the clock-free neuron array. The host loads the chain, releases
// az_rst, pulses samp_start, waits for samp_done, and pulses rd_start. The
// configuration must be steady while the sampler runs and the capture must be
// done before the readout starts; the host sequences this, as the paper's
// FPGA host did, so the domains need no handshakes of their own (samp_done is
// synchronised by the host). neuron_state brings the asynchronous neuron
// outputs out for observation, like the chip's analog test outputs.
`timescale 1ps/1ps
module pass_top
  import pass_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned NN   = ROWS * COLS
) (
  input  logic          cfg_clk,
  input  logic          cfg_en,
  input  logic          cfg_in,
  output logic          cfg_out,
  input  logic          az_rst,
  input  logic          samp_clk,
  input  logic          samp_rst_n,
  input  logic          samp_start,
  output logic          samp_done,
  input  logic          io_clk,
  input  logic          io_rst_n,
  input  logic          rd_start,
  output logic          rd_busy,
  output logic          gpio_out,
  output logic [NN-1:0] neuron_state
);

  localparam int unsigned NTRIM = 16;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned WIDTH = COLS + 1;

  neuron_cfg_t [NN-1:0]    ncfg;
  trim_t [NTRIM-1:0]       amp_trim, sig_trim;
  logic [SCFG_W-1:0]       samp_cfg;

  logic                    we, re;
  logic [AW-1:0]           waddr, raddr;
  logic [WIDTH-1:0]        wdata, rdata;

  config_chain #(.ROWS(ROWS), .COLS(COLS), .NTRIM(NTRIM)) u_cfg (
    .clk      (cfg_clk),
    .shift_en (cfg_en),
    .sin      (cfg_in),
    .sout     (cfg_out),
    .ncfg     (ncfg),
    .amp_trim (amp_trim),
    .sig_trim (sig_trim),
    .samp_cfg (samp_cfg)
  );

  neuron_core #(.ROWS(ROWS), .COLS(COLS), .NTRIM(NTRIM)) u_core (
    .ncfg     (ncfg),
    .amp_trim (amp_trim),
    .sig_trim (sig_trim),
    .az_rst   (az_rst),
    .state    (neuron_state)
  );

  state_sampler #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_samp (
    .clk      (samp_clk),
    .rst_n    (samp_rst_n),
    .start    (samp_start),
    .samp_cfg (samp_cfg),
    .state    (neuron_state),
    .we       (we),
    .waddr    (waddr),
    .wdata    (wdata),
    .done     (samp_done)
  );

  sample_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_sram (
    .wclk  (samp_clk),
    .we    (we),
    .waddr (waddr),
    .wdata (wdata),
    .rclk  (io_clk),
    .re    (re),
    .raddr (raddr),
    .rdata (rdata)
  );

  data_readout #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_rd (
    .clk   (io_clk),
    .rst_n (io_rst_n),
    .start (rd_start),
    .re    (re),
    .raddr (raddr),
    .rdata (rdata),
    .dout  (gpio_out),
    .busy  (rd_busy)
  );

endmodule
