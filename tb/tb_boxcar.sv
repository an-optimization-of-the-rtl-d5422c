// Self-checking testbench of boxcar (LEN = 16): random inputs, including
// full-scale bursts; one cycle after each input the sum must equal the sum
// of the last 16 inputs kept in a testbench queue.
`timescale 1ns/1ps
module tb_boxcar;
  localparam int W_IN = 34, LEN = 16;
  logic clk = 0, rst_n = 0;
  logic [W_IN-1:0] din;
  logic [W_IN+3:0] sum;
  int checks = 0, failures = 0;
  longint q [$];
  boxcar #(.W_IN(W_IN), .LEN(LEN)) dut (.clk, .rst_n, .din, .sum);
  always #2.5 clk = ~clk;
  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      longint v, e;
      v = (i >= 100 && i < 140) ? longint'({W_IN{1'b1}}) : longint'({$urandom, $urandom}) & longint'({W_IN{1'b1}});
      din = W_IN'(v);
      q.push_back(v);
      if (q.size() > LEN) void'(q.pop_front());
      e = 0;
      foreach (q[j]) e += q[j];
      @(negedge clk);
      checks++;
      if (longint'(sum) != e) begin failures++; if (failures < 10) $display("FAIL i=%0d got %0d exp %0d", i, sum, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
