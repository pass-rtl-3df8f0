// tb_sync3: checks that the synchronizer output equals its input delayed by
// exactly three clock edges, over 2000 cycles of random input.
`timescale 1ps/1ps
module tb_sync3;

  logic clk = 1'b0, d = 1'b0, q;
  logic [2:0] hist = '0;
  int checks = 0, failures = 0;

  sync3 dut (.clk(clk), .d(d), .q(q));

  always #1667 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      hist = {hist[1:0], d};
      // hist[2] is the d that the edge three clock periods back captured.
      if (i >= 4) begin
        checks++;
        if (q !== hist[2]) begin
          failures++;
          $display("FAIL cycle %0d q=%b exp %b", i, q, hist[2]);
        end
      end
      d = 1'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
