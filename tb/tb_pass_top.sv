// tb_pass_top: end-to-end test of the chip at 4 x 4 neurons, 64-word buffer.
//
// The testbench acts as the host. It builds configuration-chain images,
// shifts them in LSB first on cfg_clk (1 MHz) with the neurons held in
// auto-zero reset, releases the reset, captures on samp_clk (300 MHz) until
// samp_done, freezes the neurons again and reads the buffer out on gpio_out
// at io_clk (20 MHz), decoding the serial stream into 5-bit row words
// {fingerprint, col3..col0}.
//
// Capture 1 (k = 4 rows): neuron 0 clamped to 1, neuron 15 clamped to 0,
// neurons 5/6 a ferromagnetic pair, neurons 9/10 an antiferromagnetic pair.
// Capture 2 (k = 1 row, mode switch) with a slower amplifier trim. Checks:
// fingerprint on every k-th word, clamped bits constant, pair agreement, rows
// as expected for each k, capture length DEPTH + 2 sample cycles, readout
// length DEPTH * 17 + 2 I/O cycles, all free neurons at 0 under auto-zero
// reset, the old chain image appearing on cfg_out while a new one shifts in,
// and a free neuron flipping about four times less often with amp_trim 31
// than with 127. Every mechanism is counted and one that never happened
// counts as a failure.
`timescale 1ps/1ps
module tb_pass_top;
  import pass_pkg::*;

  localparam int ROWS = 4, COLS = 4, NN = 16, DEPTH = 64, WIDTH = COLS + 1;
  localparam int LEN = NN * 74 + 2 * 16 * 7 + 3;

  logic cfg_clk = 0, cfg_en = 0, cfg_in = 0, cfg_out;
  logic az_rst = 1;
  logic samp_clk = 0, samp_rst_n = 0, samp_start = 0, samp_done;
  logic io_clk = 0, io_rst_n = 0, rd_start = 0, rd_busy, gpio_out;
  logic [NN-1:0] neuron_state;
  int checks = 0, failures = 0;

  pass_top #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) dut (.*);

  always #500000 cfg_clk = ~cfg_clk;
  always #1667   samp_clk = ~samp_clk;
  always #25000  io_clk = ~io_clk;

  typedef enum int {M_CLAMP1, M_CLAMP0, M_FERRO, M_ANTI, M_FPRINT, M_MODE,
                    M_FULL, M_AZHOLD, M_TRIM, M_READBACK, M_N} mech_e;
  int mech [M_N];
  string mech_name [M_N] = '{"clamp to 1", "clamp to 0", "ferromagnetic pair",
    "antiferromagnetic pair", "fingerprint frame", "rows-to-sample mode switch",
    "buffer full", "auto-zero hold", "trim changes speed", "chain readback"};

  logic [LEN-1:0] img, prev_img;
  logic [WIDTH-1:0] words [DEPTH];

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  function automatic void put_neuron(int n, neuron_cfg_t c);
    img[n*74 +: 74] = c;
  endfunction

  function automatic void put_trims(int amp, int sig, logic [2:0] scfg);
    for (int t = 0; t < 16; t++) begin
      img[NN*74 + 7*t +: 7]      = 7'(amp);
      img[NN*74 + 112 + 7*t +: 7] = 7'(sig);
    end
    img[LEN-3 +: 3] = scfg;
  endfunction

  task automatic load_chain();
    int mism = 0;
    for (int i = 0; i < LEN; i++) begin
      @(negedge cfg_clk);
      if (cfg_out !== prev_img[i]) mism++;
      cfg_en = 1'b1; cfg_in = img[i];
    end
    @(negedge cfg_clk);
    cfg_en = 1'b0;
    chk(mism == 0, "previous chain image on cfg_out");
    if (mism == 0) mech[M_READBACK]++;
    prev_img = img;
  endtask

  task automatic capture_and_read(input int k);
    int t0, n;
    az_rst = 1'b0;
    #2000000;                                  // 2 us to settle
    @(negedge samp_clk); samp_start = 1'b1;
    @(negedge samp_clk); samp_start = 1'b0;
    n = 1;
    while (!samp_done) begin @(negedge samp_clk); n++; end
    chk(n == DEPTH + 2, $sformatf("capture took %0d sample cycles, expected %0d", n, DEPTH + 2));
    mech[M_FULL]++;
    az_rst = 1'b1;
    #10000;
    for (int i = 0; i < NN; i++) if (!dut.u_cfg.ncfg[i].clamp.en) begin
      chk(neuron_state[i] == 1'b0, "free neuron at 0 under auto-zero reset");
    end
    mech[M_AZHOLD]++;
    @(negedge io_clk); rd_start = 1'b1;
    @(negedge io_clk); rd_start = 1'b0;
    @(negedge io_clk);
    for (int j = 0; j < DEPTH * WIDTH; j++) begin
      @(negedge io_clk);
      words[j / WIDTH][WIDTH - 1 - (j % WIDTH)] = gpio_out;
    end
    @(negedge io_clk);
    chk(!rd_busy, "readout ends after DEPTH*17+2 cycles");
  endtask

  function automatic neuron_cfg_t free_cfg(int bias);
    neuron_cfg_t c = '0;
    c.bias = 8'(bias);
    return c;
  endfunction

  int flips;
  always @(neuron_state[1]) flips++;

  initial begin
    #200000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    neuron_cfg_t c;
    int agree, f127, f31;
    prev_img = '0;
    // Clear the chain so that cfg_out is known before the first image.
    img = '0;
    for (int i = 0; i < LEN; i++) begin @(negedge cfg_clk); cfg_en = 1'b1; cfg_in = 1'b0; end
    @(negedge cfg_clk); cfg_en = 1'b0;
    samp_rst_n = 1'b1; io_rst_n = 1'b1;

    // ---- capture 1: k = 4 rows ----
    for (int n = 0; n < NN; n++) put_neuron(n, free_cfg(0));
    c = '0; c.clamp = '{en: 1'b1, val: 1'b1}; put_neuron(0, c);
    c = '0; c.clamp = '{en: 1'b1, val: 1'b0}; put_neuron(15, c);
    c = free_cfg(-64); c.w[2] = 8'sd127; put_neuron(5, c);
    c = free_cfg(-64); c.w[6] = 8'sd127; put_neuron(6, c);
    c = free_cfg(64);  c.w[2] = 8'h80;   put_neuron(9, c);
    c = free_cfg(64);  c.w[6] = 8'h80;   put_neuron(10, c);
    put_trims(127, 127, 3'd2);
    load_chain();
    capture_and_read(4);
    agree = 0;
    for (int i = 0; i < DEPTH; i++) begin
      int r;
      r = i % 4;
      chk(words[i][COLS] == (r == 0), $sformatf("fingerprint of word %0d", i));
      if (r == 0) begin
        mech[M_FPRINT]++;
        chk(words[i][0] == 1'b1, "clamped neuron 0 reads 1");
        if (words[i][0]) mech[M_CLAMP1]++;
      end
      if (r == 3) begin
        chk(words[i][3] == 1'b0, "clamped neuron 15 reads 0");
        if (!words[i][3]) mech[M_CLAMP0]++;
      end
      if (r == 1 && words[i][1] == words[i][2]) agree++;
    end
    $display("ferromagnetic pair agreed in %0d of %0d frames", agree, DEPTH / 4);
    chk(agree >= DEPTH / 4 - 3, "ferromagnetic pair agrees");
    if (agree >= DEPTH / 4 - 3) mech[M_FERRO]++;
    agree = 0;
    for (int i = 2; i < DEPTH; i += 4) if (words[i][1] != words[i][2]) agree++;
    $display("antiferromagnetic pair differed in %0d of %0d frames", agree, DEPTH / 4);
    chk(agree >= DEPTH / 4 - 3, "antiferromagnetic pair disagrees");
    if (agree >= DEPTH / 4 - 3) mech[M_ANTI]++;

    // Flip rate of free neuron 1 at the fastest trim.
    az_rst = 1'b0; #1000000; flips = 0; #4000000; f127 = flips; az_rst = 1'b1;

    // ---- capture 2: k = 1 row, slow trim ----
    put_trims(31, 127, 3'd0);
    load_chain();
    az_rst = 1'b0; #1000000; flips = 0; #4000000; f31 = flips; az_rst = 1'b1;
    $display("flips in 4 us: %0d at amp_trim 127, %0d at amp_trim 31", f127, f31);
    chk(f31 * 2 < f127 && f31 * 8 > f127, "amp_trim 31 about 4x slower");
    if (f31 * 2 < f127) mech[M_TRIM]++;
    capture_and_read(1);
    for (int i = 0; i < DEPTH; i++) begin
      chk(words[i][COLS] == 1'b1, "fingerprint on every word with k = 1");
      chk(words[i][0] == 1'b1, "row 0 only: clamped neuron 0 reads 1");
    end
    mech[M_MODE]++;

    foreach (mech[m]) begin
      $display("mechanism %-28s happened %0d times", mech_name[m], mech[m]);
      chk(mech[m] > 0, $sformatf("mechanism %s never happened", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
