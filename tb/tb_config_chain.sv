// tb_config_chain: shifts a random chain image into a 4 x 4 chain, LSB first,
// and checks every decoded field (weights, bias, clamp of every neuron, every
// trim and the sampling setting) against the image, then shifts a second
// image in and checks that the first comes out of sout bit for bit. Also
// checks that with shift_en low the contents hold.
`timescale 1ps/1ps
module tb_config_chain;
  import pass_pkg::*;

  localparam int ROWS = 4, COLS = 4, NTRIM = 16, NN = ROWS * COLS;
  localparam int LEN = NN * 74 + 2 * NTRIM * 7 + 3;

  logic clk = 0, shift_en = 0, sin = 0, sout;
  neuron_cfg_t [NN-1:0] ncfg;
  trim_t [NTRIM-1:0] amp_trim, sig_trim;
  logic [2:0] samp_cfg;
  logic [LEN-1:0] img, img2;
  int checks = 0, failures = 0;

  config_chain #(.ROWS(ROWS), .COLS(COLS), .NTRIM(NTRIM)) dut (.*);

  always #500 clk = ~clk;

  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic check_fields(input logic [LEN-1:0] im);
    for (int n = 0; n < NN; n++) begin
      int b = n * 74;
      for (int k = 0; k < 8; k++) chk(64'(ncfg[n].w[k]), 64'(im[b + 8*k +: 8]), $sformatf("w[%0d][%0d]", n, k));
      chk(64'($unsigned(ncfg[n].bias)), 64'(im[b + 64 +: 8]), "bias");
      chk(64'(ncfg[n].clamp.val), 64'(im[b + 72]), "clamp.val");
      chk(64'(ncfg[n].clamp.en), 64'(im[b + 73]), "clamp.en");
    end
    for (int t = 0; t < NTRIM; t++) begin
      chk(64'(amp_trim[t]), 64'(im[NN*74 + 7*t +: 7]), "amp_trim");
      chk(64'(sig_trim[t]), 64'(im[NN*74 + NTRIM*7 + 7*t +: 7]), "sig_trim");
    end
    chk(64'(samp_cfg), 64'(im[LEN-3 +: 3]), "samp_cfg");
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < LEN; i++) begin img[i] = 1'($urandom); img2[i] = 1'($urandom); end
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk); shift_en = 1'b1; sin = img[i];
    end
    @(negedge clk); shift_en = 1'b0;
    check_fields(img);
    repeat (20) @(negedge clk);
    check_fields(img);   // holds while shift_en is low
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk);
      chk(64'(sout), 64'(img[i]), "sout");
      shift_en = 1'b1; sin = img2[i];
    end
    @(negedge clk); shift_en = 1'b0;
    check_fields(img2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
