// Self-checking testbench of trig_delay (DEPTH = 512, W = 4). Random words
// are applied every cycle; dout must be 0 until the buffer is primed and
// afterwards equal the word applied exactly DEPTH cycles earlier.
`timescale 1ns/1ps
module tb_trig_delay;
  localparam int DEPTH = 512, W = 4;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0;
  int hist [$];
  trig_delay #(.DEPTH(DEPTH), .W(W)) dut (.clk, .rst_n, .din, .dout);
  always #2.5 clk = ~clk;
  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 4*DEPTH; i++) begin
      int e;
      din = W'($urandom);
      hist.push_back(int'(din));
      @(negedge clk);
      // dout after edge i+DEPTH shows din of edge i, i.e. hist[n-1-DEPTH]
      e = (hist.size() > DEPTH) ? hist[hist.size()-1-DEPTH] : 0;
      checks++;
      if (int'(dout) != e) begin failures++; if (failures < 10) $display("FAIL i=%0d got %0d exp %0d", i, dout, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #60000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
