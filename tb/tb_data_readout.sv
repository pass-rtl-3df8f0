// tb_data_readout: checks the serial stream of the readout bit by bit.
//
// A behavioural 12 x 17 memory with a registered read port stands in for the
// SRAM buffer. After a start pulse the testbench expects, from the third
// rising edge on, the words of addresses 0..11 one bit per cycle, MSB first,
// with no gaps; busy must be high for the whole stream and fall right after
// the last bit. The readout is run twice to check it restarts.
`timescale 1ps/1ps
module tb_data_readout;

  localparam int DEPTH = 12, WIDTH = 17;
  logic clk = 0, rst_n = 0, start = 0, re, dout, busy;
  logic [3:0] raddr;
  logic [WIDTH-1:0] rdata;
  logic [WIDTH-1:0] mem [DEPTH];
  int checks = 0, failures = 0;

  data_readout #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #25000 clk = ~clk;
  always @(posedge clk) if (re) rdata <= mem[raddr];

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) mem[a] = WIDTH'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      chk(!busy, "idle before start");
      start = 1'b1;
      @(negedge clk);          // after E0
      start = 1'b0;
      @(negedge clk);          // after E1
      for (int j = 0; j < DEPTH * WIDTH; j++) begin
        @(negedge clk);        // after E(2+j)
        chk(busy, "busy during stream");
        chk(dout == mem[j / WIDTH][WIDTH - 1 - (j % WIDTH)],
            $sformatf("run %0d bit %0d", run, j));
      end
      @(negedge clk);
      chk(!busy, "busy falls after the last bit");
      if (run == 0) for (int a = 0; a < DEPTH; a++) mem[a] = WIDTH'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
