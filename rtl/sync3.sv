// sync3: flip-flop synchronizer for one asynchronous neuron output.
//
// The paper samples each free-running neuron with a chain of three registers
// so that a metastable first stage has two more clock periods to resolve
// before the value is used in the sample clock domain. q follows d with a
// latency of STAGES clock edges. There is no reset: the chain flushes itself
// within STAGES cycles, and nothing downstream uses q before then.
`timescale 1ps/1ps
module sync3 #(
  parameter int unsigned STAGES = 3
) (
  input  logic clk,
  input  logic d,
  output logic q
);

  logic [STAGES-1:0] sr;

  always_ff @(posedge clk)
    sr <= {sr[STAGES-2:0], d};

  assign q = sr[STAGES-1];

endmodule
