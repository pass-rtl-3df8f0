// analog_neuron: behavioural model of the stochastic analog neuron.
//
// This is a behavioural model of an analog block, not synthesizable logic. On
// the chip a self-biased reverse-biased diode produces shot noise, a super
// source follower buffers it, a two-stage amplifier with resistive feedback
// and auto-zeroing amplifies it, a modified Gilbert cell with a current
// comparator compares the noise against the synapse voltage vin, and an
// inverter digitises the result. The net effect, which the paper itself uses
// as its simulation model, is a binary output that is redrawn at the ticks of
// a Poisson clock of rate lambda0: at every tick the output becomes 1 with
// probability sigmoid((vin - VMID) / VSLOPE) and 0 otherwise, independently of
// every other neuron. Between ticks it holds, and there is no clock input.
//
// Trims (this design's mapping; the paper says only that the 7-bit current
// trims tune amplifier speed/gain and the sigmoid): amp_trim scales the tick
// rate, lambda0 = LAMBDA_MAX_MHZ * (amp_trim + 1) / 128, so the largest code
// gives the 150 MHz the paper measured at its fastest setting; sig_trim sets
// the sigmoid width, VSLOPE * 128 / (sig_trim + 1), nominal at the largest
// code. VMID (centre of the sigmoid, the DAC mid-scale) and VSLOPE are not
// given in the paper.
//
// az_rst is the auto-zero reset broadcast before a computation: while it is
// high the amplifier is in unity gain, no ticks occur and the output is held
// at 0 (the held value is this design's choice). The model runs in 1 ps units.
`timescale 1ps/1ps
module analog_neuron #(
  parameter real LAMBDA_MAX_MHZ = 150.0,
  parameter real VMID           = 0.4,
  parameter real VSLOPE         = 0.05
) (
  input  real        vin,
  input  logic [6:0] amp_trim,
  input  logic [6:0] sig_trim,
  input  logic       az_rst,
  output logic       out
);

  // Mean time between ticks, in ps, for the present trim.
  function automatic real mean_tick_ps(input logic [6:0] t);
    return 1.0e6 / (LAMBDA_MAX_MHZ * (real'(t) + 1.0) / 128.0);
  endfunction

  function automatic real prob_one(input real v, input logic [6:0] t);
    real width;
    width = VSLOPE * 128.0 / (real'(t) + 1.0);
    return 1.0 / (1.0 + $exp(-(v - VMID) / width));
  endfunction

  // Uniform draw in (0, 1].
  function automatic real uniform01();
    return (real'($urandom) + 1.0) / 4294967296.0;
  endfunction

  longint unsigned tick_ps;

  initial begin
    out = 1'b0;
    forever begin
      if (az_rst) begin
        out = 1'b0;
        wait (az_rst == 1'b0);
      end
      // Exponentially distributed wait: the Poisson clock of the neuron.
      tick_ps = longint'(-$ln(uniform01()) * mean_tick_ps(amp_trim)) + 1;
      // Wait for the tick, or for az_rst, which interrupts the wait.
      fork
        #(tick_ps);
        wait (az_rst == 1'b1);
      join_any
      disable fork;
      if (!az_rst)
        out = (uniform01() < prob_one(vin, sig_trim));
    end
  end

endmodule
