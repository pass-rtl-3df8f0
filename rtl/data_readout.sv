// data_readout: parallel-in serial-out readout of the sample buffer.
//
// A pulse on start (I/O clock domain, 20 MHz on the chip) reads the DEPTH
// words of the SRAM buffer in address order and shifts each WIDTH-bit word
// out on the single GPIO pin, most significant bit (the fingerprint) first,
// one bit per clock and with no gaps between words. The paper gives the PISO
// shift through one GPIO pin and the clock; bit order, framing and the start
// handshake are this design's choices.
//
// Timing: start is sampled at edge E0; the SRAM is read at E1 and the word
// loaded into the shift register at E2, so the first bit is on dout from E2
// until E3 and bit j of the stream from E(2+j). The next word is read from the
// SRAM while the last bit of the current one is still out, so the stream is
// DEPTH*WIDTH bits long without stalls. busy is high from E0 until the last
// bit has been shifted out.
`timescale 1ps/1ps
module data_readout #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 17,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(WIDTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             re,
  output logic [AW-1:0]    raddr,
  input  logic [WIDTH-1:0] rdata,
  output logic             dout,
  output logic             busy
);

  typedef enum logic [1:0] {IDLE, FETCH, LOAD, SHIFT} state_e;

  state_e            st;
  logic [WIDTH-1:0]  piso;
  logic [BW-1:0]     bitcnt;      // bits of the current word still to shift
  logic [AW:0]       words_left;  // words not yet loaded into the PISO

  assign dout = piso[WIDTH-1];
  assign busy = (st != IDLE);
  assign re   = (st == FETCH) ||
                (st == SHIFT && bitcnt == BW'(1) && words_left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= IDLE;
      piso       <= '0;
      bitcnt     <= '0;
      raddr      <= '0;
      words_left <= '0;
    end else begin
      unique case (st)
        IDLE: if (start) begin
          st         <= FETCH;
          raddr      <= '0;
          words_left <= (AW+1)'(DEPTH);
        end
        FETCH: begin
          st    <= LOAD;
          raddr <= raddr + 1'b1;
        end
        LOAD: begin
          st         <= SHIFT;
          piso       <= rdata;
          bitcnt     <= BW'(WIDTH - 1);
          words_left <= words_left - 1'b1;
        end
        SHIFT: begin
          if (bitcnt != '0) begin
            piso   <= {piso[WIDTH-2:0], 1'b0};
            bitcnt <= bitcnt - 1'b1;
          end else if (words_left == '0) begin
            st   <= IDLE;
            piso <= '0;
          end else begin
            piso       <= rdata;
            raddr      <= raddr + 1'b1;
            words_left <= words_left - 1'b1;
            bitcnt     <= BW'(WIDTH - 1);
          end
        end
      endcase
    end
  end

endmodule
