// tb_pass_top_full: the full 16 x 16 chip at its default sizes, running the
// letter-image MaxCut problem of the paper.
//
// The target image spells C, A, L on a 16 x 16 grid (pattern P below). Every
// king's-move bond gets Ising coupling J = +J0 between cells of the same
// colour and -J0 across a letter edge, so the two ground states are the image
// and its negative. For 0/1 neurons the coupling becomes weight w = 2J on
// both sides of the bond and bias b_i = -sum_j J_ij (from h_i = sum_j
// J_ij (2 s_j - 1)); J0 = 12 gives weights of +-24. The host loads the whole
// 19171-bit chain at 1 MHz, lets the array run for 20 us after the auto-zero
// reset, captures a full buffer of 8192 row words with all 16 rows sampled
// (512 frames) at 300 MHz, and reads it out through the single pin at 20 MHz.
// Checks: every 16th word carries the fingerprint; the capture and readout
// take 8194 and 8192*17+2 cycles; in the last 64 frames the majority state of
// each neuron matches the image (or its negative, equally a ground state) on
// at least 95 % of the neurons.
`timescale 1ps/1ps
module tb_pass_top_full;
  import pass_pkg::*;

  localparam int ROWS = 16, COLS = 16, NN = 256, DEPTH = 8192, WIDTH = 17;
  localparam int LEN = NN * 74 + 2 * 16 * 7 + 3;
  localparam int J0 = 12;

  logic cfg_clk = 0, cfg_en = 0, cfg_in = 0, cfg_out;
  logic az_rst = 1;
  logic samp_clk = 0, samp_rst_n = 0, samp_start = 0, samp_done;
  logic io_clk = 0, io_rst_n = 0, rd_start = 0, rd_busy, gpio_out;
  logic [NN-1:0] neuron_state;
  int checks = 0, failures = 0;

  pass_top dut (.*);

  // The host runs each clock only in the phase that uses it, which keeps the
  // 300 MHz sample clock from ticking through the millisecond-long chain load
  // and readout.
  logic cfg_run = 1'b1, samp_run = 1'b0, io_run = 1'b0;
  always begin wait (cfg_run);  #500000 cfg_clk = ~cfg_clk; end
  always begin wait (samp_run); #1667   samp_clk = ~samp_clk; end
  always begin wait (io_run);   #25000  io_clk = ~io_clk; end

  logic [LEN-1:0]   img;
  logic [WIDTH-1:0] words [DEPTH];

  // The letters C (cols 1-4), A (cols 6-10) and L (cols 12-15), rows 4-11.
  function automatic bit pix(int r, int c);
    if (r < 4 || r > 11) return 0;
    if (c == 1 || (c >= 1 && c <= 4 && (r == 4 || r == 11))) return 1;
    if (c == 6 || c == 10) return r >= 5;
    if (c >= 7 && c <= 9 && (r == 4 || r == 8)) return 1;
    if (c == 12 || (c >= 12 && c <= 15 && r == 11)) return 1;
    return 0;
  endfunction

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  initial begin
    #400000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int n, cnt, cnt_ones [NN], match, nmatch;
    neuron_cfg_t c;
    // Build the chain image.
    for (int i = 0; i < LEN; i++) img[i] = 1'b0;
    for (int r = 0; r < ROWS; r++)
      for (int col = 0; col < COLS; col++) begin
        int bsum;
        c = '0; bsum = 0;
        for (int k = 0; k < 8; k++) begin
          int rr, cc, j;
          rr = r + nbr_dr(k); cc = col + nbr_dc(k);
          if (rr >= 0 && rr < ROWS && cc >= 0 && cc < COLS) begin
            j = (pix(r, col) == pix(rr, cc)) ? J0 : -J0;
            c.w[k] = 8'(2 * j);
            bsum -= j;
          end
        end
        c.bias = 8'(bsum);
        img[(r*COLS + col)*74 +: 74] = c;
      end
    for (int t = 0; t < 16; t++) begin
      img[NN*74 + 7*t +: 7] = 7'd127;
      img[NN*74 + 112 + 7*t +: 7] = 7'd127;
    end
    img[LEN-3 +: 3] = 3'd4;             // sample all 16 rows
    for (int i = 0; i < LEN; i++) begin @(negedge cfg_clk); cfg_en = 1'b1; cfg_in = img[i]; end
    @(negedge cfg_clk); cfg_en = 1'b0;
    chk(dut.samp_cfg == 3'd4, "sampling setting loaded");
    $display("chain loaded at %0t ps", $time);
    $fflush();
    cfg_run = 1'b0; samp_run = 1'b1;

    repeat (4) @(negedge samp_clk);      // resets are applied while each
    samp_rst_n = 1'b1;                   // clock runs, since the host only
    az_rst = 1'b0;                       // clocks a domain when it uses it
    #20000000;                           // 20 us of free running
    @(negedge samp_clk); samp_start = 1'b1;
    @(negedge samp_clk); samp_start = 1'b0;
    n = 1;
    while (!samp_done) begin @(negedge samp_clk); n++; end
    chk(n == DEPTH + 2, $sformatf("capture took %0d cycles", n));
    az_rst = 1'b1;
    $display("capture done at %0t ps", $time);
    $fflush();
    samp_run = 1'b0; io_run = 1'b1;
    repeat (4) @(negedge io_clk);
    io_rst_n = 1'b1;
    @(negedge io_clk); rd_start = 1'b1;
    @(negedge io_clk); rd_start = 1'b0;
    @(negedge io_clk);
    for (int j = 0; j < DEPTH * WIDTH; j++) begin
      @(negedge io_clk);
      words[j / WIDTH][WIDTH - 1 - (j % WIDTH)] = gpio_out;
    end
    @(negedge io_clk);
    chk(!rd_busy, "readout length");

    for (int i = 0; i < DEPTH; i++) chk(words[i][COLS] == (i % 16 == 0), "fingerprint");
    for (int i = 0; i < NN; i++) cnt_ones[i] = 0;
    cnt = 0;
    for (int f = DEPTH / 16 - 64; f < DEPTH / 16; f++) begin
      cnt++;
      for (int r = 0; r < ROWS; r++)
        for (int col = 0; col < COLS; col++)
          if (words[f*16 + r][col]) cnt_ones[r*COLS + col]++;
    end
    match = 0; nmatch = 0;
    for (int r = 0; r < ROWS; r++) begin
      string line;
      line = "";
      for (int col = 0; col < COLS; col++) begin
        bit maj;
        maj = cnt_ones[r*COLS + col] * 2 > cnt;
        line = {line, maj ? "#" : "."};
        if (maj == pix(r, col)) match++; else nmatch++;
      end
      $display("  %s", line);
    end
    $display("majority image matches target on %0d of 256 neurons (negative: %0d)", match, nmatch);
    chk(match >= 243 || nmatch >= 243, "ground state reached (image or its negative)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
