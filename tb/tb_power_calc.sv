// Self-checking testbench of power_calc. Random 20-bit bins (and full-scale
// corners) are applied every cycle; two cycles later pw[k] must equal
// floor(re/16)^2 + floor(im/16)^2, doubled for k = 16, computed here with
// integer arithmetic.
`timescale 1ns/1ps
module tb_power_calc;
  localparam int X_W = 20, SQ_W = 16, P_W = 34;
  logic clk = 0, rst_n = 0;
  logic signed [X_W-1:0] re [17], im [17];
  logic [P_W-1:0] pw [1:16];
  int checks = 0, failures = 0;
  longint expq [$];

  power_calc #(.X_W(X_W), .SQ_W(SQ_W), .P_W(P_W)) dut (.clk, .rst_n, .re, .im, .pw);
  always #2.5 clk = ~clk;

  function automatic longint fdiv16(int v);
    return (v >= 0) ? longint'(v / 16) : -longint'((-v + 15) / 16);
  endfunction

  initial begin
    for (int k = 0; k < 17; k++) begin re[k] = '0; im[k] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      for (int k = 0; k <= 16; k++) begin
        int r, m;
        r = (i < 2) ? ((i == 0) ? -524288 : 524287) : $signed($urandom_range(1048575)) - 524288;
        m = (i < 2) ? r : $signed($urandom_range(1048575)) - 524288;
        re[k] = X_W'(r); im[k] = X_W'(m);
        if (k > 0) begin
          longint p;
          p = fdiv16(r)*fdiv16(r) + fdiv16(m)*fdiv16(m);
          if (k == 16) p = 2*p;
          expq.push_back(p);
        end
      end
      @(negedge clk);
      if (i >= 1) begin
        for (int k = 1; k <= 16; k++) begin
          longint e;
          e = expq[k-1];
          checks++;
          if (longint'(pw[k]) != e) begin failures++; if (failures < 10) $display("FAIL i=%0d k=%0d got %0d exp %0d", i, k, pw[k], e); end
        end
        for (int k = 0; k < 16; k++) void'(expq.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
