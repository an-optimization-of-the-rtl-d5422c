// Self-checking testbench of sample_window: streams random samples and checks
// that x[i] holds the sample that entered N-1-i cycles ago and that 'valid'
// rises exactly after N samples.
`timescale 1ns/1ps
module tb_sample_window;
  localparam int IN_W = 14, N = 32;
  logic clk = 0, rst_n = 0;
  logic signed [IN_W-1:0] din;
  logic signed [IN_W-1:0] x [N];
  logic valid;
  int checks = 0, failures = 0;
  int hist [$];
  sample_window #(.IN_W(IN_W), .N(N)) dut (.clk, .rst_n, .din, .x, .valid);
  always #2.5 clk = ~clk;
  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < 300; c++) begin
      din = IN_W'($urandom);
      @(posedge clk);
      hist.push_back(int'(din));
      @(negedge clk);
      checks++;
      if (valid != (hist.size() >= N)) begin failures++; $display("FAIL valid at %0d", hist.size()); end
      for (int i = 0; i < N; i++) begin
        automatic int age = N - 1 - i;
        if (hist.size() > age) begin
          checks++;
          if (int'(x[i]) != hist[hist.size()-1-age]) begin
            failures++;
            if (failures < 10) $display("FAIL x[%0d]=%0d exp %0d", i, x[i], hist[hist.size()-1-age]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
