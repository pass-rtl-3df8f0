# PASS: a clock-free array of stochastic neurons that samples Boltzmann distributions

The chip turns physical noise into random samples. It has a 16 x 16 grid of
binary neurons. Each neuron flips randomly with a probability that depends on its
neighbours, so the array as a whole draws samples from a Boltzmann distribution
over its 256 binary states. That is the inner loop of Gibbs sampling, MaxCut and
Ising annealing, and Boltzmann-machine learning.

There is no global clock in the array. Each neuron updates whenever its own
noise source fires. Each neuron sees its neighbours through a small digital
dot product, whose result a capacitor DAC turns into a voltage. Around this
clock-free core are three ordinary synchronous parts:

- a long shift chain that holds every weight and setting;
- a fast sampler that photographs the array into an SRAM buffer;
- a serial port that streams the buffer out to a host.

This repository gives SystemVerilog for all of it:

- synthesizable RTL for the digital parts;
- behavioural models for the two analog parts, the DAC and the neuron.

## The stochastic neuron

Each analog neuron is built as follows:

1. A reverse-biased diode produces shot noise.
2. A buffer and a two-stage amplifier amplify it.
3. A Gilbert-cell comparator compares the amplified noise with the synapse voltage `vin`.
4. An inverter turns the result into a logic level.

For design purposes its behaviour reduces to a simple model, which
`rtl/analog_neuron.sv` implements:

- The output changes only at the ticks of a private Poisson clock of rate λ0.
- At each tick the output is redrawn: it becomes 1 with probability
  `1 / (1 + exp(-(vin - VMID) / VSLOPE))`, and 0 otherwise.
- Between ticks the output holds.
- Every neuron's randomness is independent.

Two 7-bit current trims tune the analog circuit. Each trim is shared by a group
of 16 neurons. In this model:

- `amp_trim` sets the speed: λ0 = 150 MHz × (amp_trim+1)/128. 150 MHz is the
  fastest rate measured on the chip.
- `sig_trim` sets the width of the sigmoid: VSLOPE × 128/(sig_trim+1), so a
  smaller code gives a wider sigmoid and a higher temperature.

The defaults are VMID = 0.4 V (mid-scale of a 0.8 V DAC) and VSLOPE = 50 mV.
These two values are assumptions: the silicon does not specify them.

`az_rst` is the auto-zero reset broadcast to every neuron before a run. It
cancels amplifier drift on silicon. In the model:

- While `az_rst` is high, the neuron does not tick and its output is held at 0.
- Releasing `az_rst` starts all neurons at once.

A neighbour's flip reaches the neuron's input 2 ns later: the DAC model
carries that whole path delay. The model is written with `#` delays and `real` numbers, so it is for simulation
only, and synthesis tools reject it. A real implementation replaces
`analog_neuron` and `c2c_dac` with the analog macros, which have the same ports.

## Synapse: from neighbour states to a DAC code

`rtl/binary_dot_product.sv` is the digital front of each neuron. It works in four steps:

1. Each of the eight neighbour bits gates its signed 8-bit weight: a mux
   selects the weight when the bit is 1, and 0 otherwise.
2. An adder tree sums the eight gated weights.
3. The signed 8-bit bias is added.
4. The result goes to a 7-bit C-2C DAC.

The wide sum has to be squeezed into 7 bits. This design does it as follows:

```
sat  = clamp(sum, -128, 127)
code = (sat + 128) >> 1          // 0..127, code 64 = zero input
vin  = 0.8 V * code / 128
```

Putting this together with the default neuron model gives:

```
P(s_i = 1) ≈ sigmoid( (Σ_j w_ij s_j + b_i) / 16 × (sig_trim+1)/128 )
```

This is the Gibbs update of a Boltzmann machine with energy
`E = -Σ_{i<j} w_ij s_i s_j - Σ_i b_i s_i` and inverse temperature 1/16 per weight
unit at full `sig_trim`. The LSB that is dropped makes the steps 2 weight units
wide. The sum saturates at ±128, so a field larger than about 8 temperature
units can no longer be told apart. Both directions of a bond are stored
separately (`w_ij` in neuron i, `w_ji` in neuron j). The host must write them
equal if it wants a true Boltzmann distribution.

To map an Ising problem with couplings J_ij on ±1 spins onto the 0/1 neurons,
use `w_ij = 2 J_ij` and `b_i = -Σ_j J_ij`. These are exact up to the
temperature scale. For MaxCut, make the couplings negative on every graph
edge.

## The king's-move core

`rtl/neuron_core.sv` instantiates ROWS x COLS `neuron_cell`s. Each cell is a
synapse, a DAC and a neuron, plus a clamp. Each cell is wired to its eight
king's-move neighbours. The weight order is fixed in `pass_pkg`:

| k | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| neighbour | N (r-1,c) | NE (r-1,c+1) | E (r,c+1) | SE (r+1,c+1) | S (r+1,c) | SW (r+1,c-1) | W (r,c-1) | NW (r-1,c-1) |

Two more rules apply at the edges and to the trims:

- A neighbour outside the array reads as 0, so edge cells simply have fewer
  inputs.
- Neuron `n = r*COLS + c` uses trim group `n / 16`, which is one row of the
  16 x 16 array.

Two clamp bits per neuron (`en`, `val`) can override the output with a constant.
This is how visible units are fixed during conditional sampling, for example
when reconstructing half of an image.

## Configuration chain

Every programmable bit lives in one shift register, `rtl/config_chain.sv`,
clocked by `cfg_clk` (1 MHz on the chip). The chain holds 74 × 256 + 2 × 16 × 7
+ 3 = 19 171 bits. When `cfg_en` is high, each rising edge moves every bit one
place towards bit 0 and takes `cfg_in` in at the head. So the host sends the
image **bit 0 first**, and after 19 171 edges bit i of the image is chain bit
i. `cfg_out` is bit 0, which allows readback and daisy-chaining.

| chain bits | field |
|---|---|
| `n*74 + 0 .. +63` | neuron n weights, `w[k]` at `n*74 + 8k` (8 bits, two's complement) |
| `n*74 + 64 .. +71` | neuron n bias (8 bits, two's complement) |
| `n*74 + 72` | clamp value |
| `n*74 + 73` | clamp enable |
| `18944 + 7t` | amplifier trim t (t = 0..15) |
| `19056 + 7t` | sigmoid trim t |
| `19168 .. 19170` | sampling setting (`samp_cfg`) |

This layout is the packed struct `chain_t` inside `config_chain`, together with
`pass_pkg::neuron_cfg_t`. The chain has no reset and no shadow register: the
array sees every intermediate value while the host is shifting. The host should
therefore hold `az_rst` high while loading.

## Capturing samples: the state sampler

This is the least obvious part of the chip. `rtl/state_sampler.sv` runs on
`samp_clk` (300 MHz on the chip). It turns 256 asynchronous outputs into a
stream of 17-bit words, one word per clock, and writes them into the
8192 x 17 buffer (`rtl/sample_sram.sv`).

1. **Synchronisation.** Each neuron output goes through its own three-flop
   synchronizer (`rtl/sync3.sv`). The value the sampler sees is therefore the
   neuron state from about 2–3 sample-clock cycles earlier. Neurons tick far
   slower than that (≤150 MHz mean), so a metastable capture costs at most one
   update's worth of age.
2. **Choosing rows.** `samp_cfg` = 0, 1, 2, 3, 4 selects k = 1, 2, 4, 8, 16
   rows; codes above 4 also mean 16. Rows 0..k-1 are sampled.
3. **Snapshots.** Once every k cycles, the synchronised states of the k rows
   are loaded into 16 column shift registers, which holds a snapshot. On every
   cycle the bottom of the columns is written as one word, and the columns
   shift up by one row. Every sampled neuron is thus sampled at
   `f_samp / k`, and the SRAM is written on every cycle.
4. **Word format.** A word is `{fingerprint, col15 … col0}`. The fingerprint is
   1 on the word that holds row 0 of a snapshot. The host uses it to find frame
   boundaries in the stream.
5. **Timing.**
   - A one-cycle pulse on `samp_start` clears the address.
   - The first snapshot is taken on the next edge, and its first word is
     written one edge later, 2 edges after `samp_start` is sampled.
   - After exactly DEPTH = 8192 words, `samp_done` rises and writing stops.
   - With k = 16, a capture is 512 frames of the full array, taking 8192
     cycles = 27.3 µs at 300 MHz.

The words in the buffer are therefore laid out as
`addr = frame*k + row`. The sampler asserts (`we |-> !done`) that it never
writes after the buffer is full.

## Readout

`rtl/data_readout.sv` runs on `io_clk` (20 MHz). A pulse on `rd_start` reads the
buffer in address order and shifts each word out on `gpio_out`, fingerprint
(MSB) first, with no gaps:

- `rd_start` is sampled at edge E0.
- Bit j of the stream is on the pin from edge E(2+j).
- The stream is 8192 × 17 = 139 264 bits long, about 7 ms.
- `rd_busy` stays high until the last bit has gone.

The read of the next word overlaps the last bit of the current one. The SRAM
read port is registered and clocked by `io_clk`.

## Top level and the host sequence

`rtl/pass_top.sv` connects `config_chain → neuron_core → state_sampler ↔
sample_sram ↔ data_readout` and exposes four clock domains: `cfg_clk`,
`samp_clk`, `io_clk`, and the clock-free array. There are no cross-domain
handshakes. As on the chip, the host puts the phases in order:

1. Hold `az_rst` high, and shift in the 19 171-bit chain.
2. Release `az_rst` and let the array settle, for example 20 µs.
3. Pulse `samp_start`, wait for `samp_done`, and synchronise it in the host.
4. Pulse `rd_start` and collect 139 264 bits from `gpio_out`.

`neuron_state` brings the raw neuron outputs out. It stands in for the analog
test outputs of the chip.

## Where this design departs from, or fills in, the source description

- **Neuron and DAC are behavioural.** Noise source, buffer, amplifier, sigmoid
  comparator, output inverter and current-trim DACs are represented only by
  the neuron model above. The values of VMID and VSLOPE, and the way each trim
  code maps to rate or width, are this design's choices. The DAC is an ideal
  ladder, with no leakage and no mismatch.
- **Neighbour-to-neighbour delay.** On silicon a neighbour's flip reaches a
  neuron's input after a median of about 2 ns, through the adder logic and the
  DAC. That is a third of the 6.7 ns mean time between flips at full speed,
  and it skews the sampled distribution slightly. Here the synapse is
  zero-delay and the whole 2 ns sits as a transport delay on the DAC output
  (`c2c_dac.DELAY_PS`). The delay is fixed, with no spread between cells;
  setting it to 0 gives the ideal asynchronous Gibbs sampler.
- **Sum-to-code mapping** (saturate, offset, drop LSB) is this design's own.
  The source says only that a 7-bit result drives the DAC. One schematic label
  suggests eight ladder bits (b0–b7); this design follows the stated 7 bits.
- **Capture length.** The source describes sampling "once every k cycles" with
  one row word per cycle. That gives 27.3 µs for a full 8192-word buffer at
  300 MHz. It also quotes about 440 µs for the same 512 full-array samples.
  The two figures cannot both hold. This design follows the row-per-cycle
  description.
- **Readout rate.** Two readout rates are quoted, 20 MHz and about 10 MHz. The
  logic does not depend on the rate, and the testbenches use 20 MHz.
- **Own choices:**
  - the edge cells read off-array neighbours as 0;
  - trim groups are rows;
  - the order of fields in the chain;
  - the sampled rows are rows 0..k-1;
  - the meaning of the fingerprint bit;
  - the start/done and start/busy handshakes;
  - MSB-first bit order;
  - the value held during `az_rst`.

## Files

All code is in `rtl/`, with one unit per file:

- **Shared definitions:** `pass_pkg.sv`, for constants, the neuron record, the neighbour order and the row-count decoding.
- **Core logic:** `binary_dot_product.sv`, `neuron_cell.sv`, `neuron_core.sv`.
- **Behavioural analog models:** `c2c_dac.sv`, `analog_neuron.sv`.
- **Configuration:** `config_chain.sv`.
- **Sampling:** `sync3.sv`, `state_sampler.sv`, `sample_sram.sv`.
- **Readout and top level:** `data_readout.sv`, `pass_top.sv`.

`tb/` holds one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. Two of them cover the
whole chip:

- **`tb_pass_top`** runs a 4 x 4 array with a 64-word buffer. It makes each
  mechanism happen and counts it:
  - clamping to 1 and to 0;
  - ferromagnetic and antiferromagnetic coupling;
  - the fingerprint;
  - a switch of sampling mode;
  - a full buffer;
  - the az_rst hold;
  - the trim changing speed;
  - chain readback.
- **`tb_pass_top_full`** runs the full 16 x 16 chip with an 8192-word buffer.
  It loads an Ising problem whose ground states are an image of the letters
  C-A-L and its negative. It captures 512 full frames and reads them out
  through the pin. It checks:
  - the cycle counts;
  - the fingerprints;
  - that the majority image of the last 64 frames matches a ground state on
    at least 95 % of the neurons. In practice 256 of 256 match.

  It takes about 80 seconds in Verilator.

## Simulating

Verilator 5 with `--timing` is needed, for the delays in the behavioural models.
List the package first and let Verilator find the modules in `rtl/`:

```
verilator --binary --timing --assert -Wno-fatal \
    --top-module tb_pass_top -y rtl rtl/pass_pkg.sv tb/tb_pass_top.sv
./obj_dir/Vtb_pass_top
```

The neuron model draws its random numbers with `$urandom`, so
`+verilator+seed+N` changes each run. To change the array size, override
`ROWS`, `COLS` and `DEPTH` on `pass_top`. Then:

- The chain length follows from the sizes automatically.
- The word width is COLS + 1.
- The trim count stays 16.
