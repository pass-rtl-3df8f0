// tb_sample_sram: writes random words to random addresses of a small buffer
// on one clock, reads them back on a second, unrelated clock and compares
// with a shadow copy; also checks the one-cycle registered read latency.
`timescale 1ps/1ps
module tb_sample_sram;

  localparam int DEPTH = 256;
  logic wclk = 0, rclk = 0, we = 0, re = 0;
  logic [7:0]  waddr = '0, raddr = '0;
  logic [16:0] wdata = '0, rdata;
  logic [16:0] shadow [DEPTH];
  logic        valid [DEPTH];
  int checks = 0, failures = 0;

  sample_sram #(.DEPTH(DEPTH), .WIDTH(17)) dut (.*);

  always #1667 wclk = ~wclk;
  always #25000 rclk = ~rclk;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) valid[i] = 1'b0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge wclk);
      we = 1'b1; waddr = 8'($urandom); wdata = 17'($urandom);
      shadow[waddr] = wdata; valid[waddr] = 1'b1;
    end
    @(negedge wclk); we = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge rclk);
      re = 1'b1; raddr = 8'(a);
      @(negedge rclk);
      re = 1'b0;
      if (valid[a]) begin
        checks++;
        if (rdata !== shadow[a]) begin
          failures++;
          $display("FAIL addr %0d got %h exp %h", a, rdata, shadow[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
