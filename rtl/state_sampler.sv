// state_sampler: the neuron state sampler of the PASS chip.
//
// Each neuron output passes through a 3-register synchronizer (sync3) clocked
// by the fast sample clock (300 MHz on the chip). The sampling setting
// samp_cfg selects k = 1, 2, 4, 8 or 16 rows; once every k cycles the
// synchronised states of rows 0..k-1 are loaded into the sample columns, one
// shift register per column, and on every cycle the head row of the columns
// is written to the SRAM buffer while the columns shift by one row. Each
// neuron of the sampled rows is therefore sampled at f_clk / k and the buffer
// receives one row word per cycle, as in the paper. The word is
// {fingerprint, state of columns COLS-1..0}; the fingerprint bit is 1 on the
// first row (row 0) of every snapshot so the host can find the frame
// boundaries in the stream.
//
// Choices of this design, where the paper is silent: the sampled rows are rows
// 0..k-1; a pulse on start clears the write address and begins a capture;
// capture stops, with done high, once all DEPTH words are written; the first
// word is written one cycle after the first snapshot. samp_cfg must be held
// steady during a capture.
`timescale 1ps/1ps
module state_sampler
  import pass_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned DEPTH = 8192,
  localparam int unsigned NN   = ROWS * COLS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [SCFG_W-1:0]  samp_cfg,
  input  logic [NN-1:0]      state,
  output logic               we,
  output logic [AW-1:0]      waddr,
  output logic [COLS:0]      wdata,
  output logic               done
);

  logic [NN-1:0]            synced;
  logic [ROWS-1:0][COLS-1:0] col_sr;   // sample columns, index = row slot
  logic [ROWS-1:0]          fp_sr;     // fingerprint travelling with each row
  logic [4:0]               cyc;       // position inside the k-cycle frame
  logic [4:0]               k_m1;
  logic                     active, primed;
  int unsigned              k;

  for (genvar n = 0; n < NN; n++) begin : g_sync
    sync3 u_sync (.clk(clk), .d(state[n]), .q(synced[n]));
  end

  always_comb begin
    k    = rows_from_cfg(samp_cfg);
    k    = (k > ROWS) ? ROWS : k;
    k_m1 = 5'(k - 1);
  end

  assign we    = active && primed;
  assign wdata = {fp_sr[0], col_sr[0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      primed <= 1'b0;
      done   <= 1'b0;
      cyc    <= '0;
      waddr  <= '0;
      col_sr <= '0;
      fp_sr  <= '0;
    end else if (start) begin
      active <= 1'b1;
      primed <= 1'b0;
      done   <= 1'b0;
      cyc    <= '0;
      waddr  <= '0;
    end else if (active) begin
      if (we) begin
        if (waddr == AW'(DEPTH - 1)) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
        waddr <= waddr + 1'b1;
      end
      if (cyc == 5'd0) begin
        // Snapshot of rows 0..k-1 into the sample columns.
        for (int r = 0; r < ROWS; r++) begin
          col_sr[r] <= (r < int'(k)) ? synced[r*COLS +: COLS] : '0;
          fp_sr[r]  <= (r == 0);
        end
        primed <= 1'b1;
      end else begin
        // Shift the columns one row towards the SRAM.
        col_sr <= {{COLS{1'b0}}, col_sr[ROWS-1:1]};
        fp_sr  <= {1'b0, fp_sr[ROWS-1:1]};
      end
      cyc <= (cyc == k_m1) ? 5'd0 : cyc + 5'd1;
    end
  end

  // A capture never writes past the end of the buffer.
  assert property (@(posedge clk) we |-> !done);

endmodule
