// neuron_core: the ROWS x COLS array of stochastic neurons.
//
// Every cell is wired to its king's-move neighbours (the four nearest and the
// four diagonal cells), as drawn in the paper; neighbour k of the cell at
// (r, c) is the cell at (r + nbr_dr(k), c + nbr_dc(k)) in pass_pkg order. A
// neighbour that would lie outside the array reads as state 0, so its weight
// never contributes (the paper does not describe the edge cells). The paper
// groups the trim circuits by 16 neurons; here neuron n = r*COLS + c uses trim
// n / 16 (one row of the 16 x 16 array), modulo NTRIM.
//
// The array has no clock: every cell updates on its own Poisson clock and
// reacts to its neighbours through combinational synapses. state[n] is the
// output of neuron n.
`timescale 1ps/1ps
module neuron_core
  import pass_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned NTRIM = 16,
  localparam int unsigned NN   = ROWS * COLS
) (
  input  neuron_cfg_t [NN-1:0]  ncfg,
  input  trim_t [NTRIM-1:0]     amp_trim,
  input  trim_t [NTRIM-1:0]     sig_trim,
  input  logic                  az_rst,
  output logic [NN-1:0]         state
);

  localparam int unsigned GROUP = 16;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned N = r * COLS + c;
      localparam int unsigned G = (N / GROUP) % NTRIM;
      logic [NNBR-1:0] nbr;

      for (genvar k = 0; k < NNBR; k++) begin : g_nbr
        localparam int RR = int'(r) + nbr_dr(k);
        localparam int CC = int'(c) + nbr_dc(k);
        if (RR >= 0 && RR < int'(ROWS) && CC >= 0 && CC < int'(COLS)) begin : g_in
          assign nbr[k] = state[RR * COLS + CC];
        end else begin : g_edge
          assign nbr[k] = 1'b0;
        end
      end

      neuron_cell u_cell (
        .nbr      (nbr),
        .cfg      (ncfg[N]),
        .amp_trim (amp_trim[G]),
        .sig_trim (sig_trim[G]),
        .az_rst   (az_rst),
        .out      (state[N])
      );
    end
  end

endmodule
