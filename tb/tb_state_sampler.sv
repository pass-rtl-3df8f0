// tb_state_sampler: cycle-exact test of the neuron state sampler.
//
// A 16 x 4 array of random states, changed at every falling edge, is sampled
// into a 128-word buffer for the settings k = 1, 4, 16 and for code 7 (16
// rows). The testbench keeps its own history of the states seen at each
// rising edge and works out, independently of the sampler, every word that
// must be written: word i of a capture is row i mod k of the snapshot taken
// at frame i / k, i.e. the states of three edges before the snapshot edge
// (the 3-register synchronizer), with the fingerprint bit set on row 0. It
// checks the write data, that writes come on consecutive cycles at
// consecutive addresses starting two edges after start (the sampling period
// of k cycles follows from the data), that exactly 128 words are written, and
// that done rises and stays up.
`timescale 1ps/1ps
module tb_state_sampler;

  localparam int ROWS = 16, COLS = 4, NN = 64, DEPTH = 128;
  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] samp_cfg;
  logic [NN-1:0] state = '0;
  logic we, done;
  logic [6:0] waddr;
  logic [COLS:0] wdata;
  int checks = 0, failures = 0;

  state_sampler #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) dut (.*);

  always #1667 clk = ~clk;
  always @(negedge clk) state <= {$urandom, $urandom};

  logic [NN-1:0] hist [100000];
  int cyc = 0, start_cyc = -1, nwr = 0, first_wr = -1, last_wr = -1;
  int k_cur = 1;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    hist[cyc] = state;
    if (start) start_cyc = cyc;
    if (we) begin
      int f, r, snap;
      logic [COLS:0] exp;
      if (nwr == 0) begin
        first_wr = cyc;
        chk(cyc == start_cyc + 2, $sformatf("first write %0d cycles after start", cyc - start_cyc));
      end else
        chk(cyc == last_wr + 1, "writes on consecutive cycles");
      last_wr = cyc;
      f = nwr / k_cur; r = nwr % k_cur;
      snap = first_wr - 1 + f * k_cur;
      exp = {r == 0, hist[snap - 3][r*COLS +: COLS]};
      chk(int'(waddr) == nwr, "write address");
      chk(wdata == exp, $sformatf("k=%0d word %0d got %b exp %b", k_cur, nwr, wdata, exp));
      nwr++;
    end
    cyc++;
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] cfgs [4] = '{3'd0, 3'd2, 3'd4, 3'd7};
    int ks [4] = '{1, 4, 16, 16};
    samp_cfg = 3'd0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (cfgs[i]) begin
      @(negedge clk);
      samp_cfg = cfgs[i]; k_cur = ks[i]; nwr = 0;
      repeat (5) @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      repeat (DEPTH + 10) @(negedge clk);
      chk(nwr == DEPTH, $sformatf("k=%0d wrote %0d words", ks[i], nwr));
      chk(done == 1'b1, "done after a full buffer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
