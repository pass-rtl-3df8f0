// pass_pkg: types and constants shared by the PASS stochastic sampler.
//
// The array is a grid of binary stochastic neurons, each coupled to its eight
// king's-move neighbours through 8-bit signed weights plus an 8-bit signed
// bias, with two clamp bits that can pin the output to 0 or 1. The 74-bit
// per-neuron record, the 7-bit trims for groups of 16 neurons and the 3-bit
// sampling setting are the contents of the configuration chain given by the
// paper. The neighbour order and the bit order inside the record are this
// design's own choice: neighbour k of a neuron lies at (row+DR[k], col+DC[k]),
// k = 0..7 being N, NE, E, SE, S, SW, W, NW, with row 0 at the north edge.
`timescale 1ps/1ps
package pass_pkg;

  localparam int unsigned NNBR      = 8;   // king's-move neighbours
  localparam int unsigned WW        = 8;   // weight and bias width
  localparam int unsigned CODE_W    = 7;   // DAC code width
  localparam int unsigned TRIM_W    = 7;   // trim code width
  localparam int unsigned SCFG_W    = 3;   // sampling setting width
  localparam int unsigned NCFG_BITS = NNBR * WW + WW + 2;  // 74

  typedef logic signed [WW-1:0] weight_t;

  // Clamp bits: en = 1 forces the neuron output to val.
  typedef struct packed {
    logic en;
    logic val;
  } clamp_t;

  // One neuron's 74 configuration bits, MSB first: clamp, bias, w[7]..w[0].
  typedef struct packed {
    clamp_t                       clamp;
    weight_t                      bias;
    logic [NNBR-1:0][WW-1:0]      w;
  } neuron_cfg_t;

  typedef logic [TRIM_W-1:0] trim_t;

  // Row and column offsets of neighbour k (N, NE, E, SE, S, SW, W, NW).
  function automatic int nbr_dr(int k);
    case (k)
      0, 1, 7: return -1;
      3, 4, 5: return  1;
      default: return  0;
    endcase
  endfunction

  function automatic int nbr_dc(int k);
    case (k)
      1, 2, 3: return  1;
      5, 6, 7: return -1;
      default: return  0;
    endcase
  endfunction

  // Sampling setting -> number of rows k sampled together (1,2,4,8,16).
  // Codes above 4 select 16 rows.
  function automatic int unsigned rows_from_cfg(logic [SCFG_W-1:0] c);
    return (c > 3'd4) ? 16 : (1 << c);
  endfunction

endpackage
