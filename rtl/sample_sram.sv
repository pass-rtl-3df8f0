// sample_sram: the sample buffer, DEPTH words of WIDTH bits.
//
// On the chip this is a 136 kbit SRAM macro with 17 bit lines holding 8192 row
// samples: 16 neuron states plus the fingerprint bit. Here it is an array that
// synthesis maps to a memory. It has a write port in the sample clock domain
// and a read port in the I/O clock domain; the two are never used at once
// (the buffer is filled, then read out), so no arbitration is needed. Writes
// take effect at the wclk edge with we high; rdata is registered and shows the
// word at raddr one rclk edge after re. The two-port organisation is this
// design's choice; the paper gives only the size.
`timescale 1ps/1ps
module sample_sram #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 17,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rclk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge wclk)
    if (we) mem[waddr] <= wdata;

  always_ff @(posedge rclk)
    if (re) rdata <= mem[raddr];

endmodule
