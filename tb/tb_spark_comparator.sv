// Self-checking testbench of spark_comparator: random samples (including the
// most negative value) and thresholds; 'spark' must equal |x| > threshold
// one cycle later.
`timescale 1ns/1ps
module tb_spark_comparator;
  localparam int IN_W = 14;
  logic clk = 0, rst_n = 0;
  logic signed [IN_W-1:0] x;
  logic [IN_W-2:0] threshold;
  logic spark;
  int checks = 0, failures = 0;
  spark_comparator #(.IN_W(IN_W)) dut (.clk, .rst_n, .x, .threshold, .spark);
  always #2.5 clk = ~clk;
  initial begin
    x = '0; threshold = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int v, t, m;
      v = (i == 5) ? -8192 : $signed($urandom_range(16383)) - 8192;
      t = (i % 3 == 0) ? (v < 0 ? -v : v) : $urandom_range(8191);   // exercise equality
      if (t > 8191) t = 8191;
      x = IN_W'(v); threshold = (IN_W-1)'(t);
      m = v < 0 ? -v : v;
      @(negedge clk);
      checks++;
      if (spark != (m > t)) begin failures++; if (failures < 10) $display("FAIL x=%0d thr=%0d spark=%0b", v, t, spark); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
