// Self-checking testbench of notch_cascade (27.12, 40.9, 55.2, 70.7 MHz).
// 1. An impulse comes out unchanged exactly 4 cycles later.
// 2. Random input is compared with four cascaded notch recursions evaluated
//    in real arithmetic (tolerance 6 LSB).
// 3. A sine at each of the four notch frequencies is suppressed below 5 %.
`timescale 1ns/1ps
module tb_notch_cascade;
  localparam int  IN_W = 14;
  localparam real FS = 200.0, R = 0.99;
  localparam real PI = 3.14159265358979323846;
  localparam real FN [4] = '{27.12, 40.9, 55.2, 70.7};
  logic clk = 0, rst_n = 0;
  logic signed [IN_W-1:0] x, y;
  int checks = 0, failures = 0;
  real sx1 [4], sx2 [4], sy1 [4], sy2 [4];
  real refq [$];

  notch_cascade #(.IN_W(IN_W)) dut (.clk, .rst_n, .x, .y);
  always #2.5 clk = ~clk;

  function automatic real fabs(real v); return v < 0 ? -v : v; endfunction

  function automatic real model(real v);
    real u, o;
    u = v;
    for (int s = 0; s < 4; s++) begin
      real c;
      c = $cos(2.0*PI*FN[s]/FS);
      o = u - 2.0*c*sx1[s] + sx2[s] + 2.0*R*c*sy1[s] - R*R*sy2[s];
      sx2[s] = sx1[s]; sx1[s] = u; sy2[s] = sy1[s]; sy1[s] = o;
      u = o;
    end
    return u;
  endfunction

  task automatic do_reset();
    rst_n = 0; x = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int s = 0; s < 4; s++) begin sx1[s] = 0; sx2[s] = 0; sy1[s] = 0; sy2[s] = 0; end
    refq.delete();
  endtask

  initial begin
    real peak, maxerr;
    int lat;
    // 1. impulse latency
    do_reset();
    x = 14'sd1000;
    @(negedge clk); x = '0;
    lat = 1;
    while (y == 0 && lat < 20) begin @(negedge clk); lat++; end
    checks += 2;
    if (lat != 4) begin failures++; $display("FAIL latency %0d", lat); end
    if (y != 14'sd1000) begin failures++; $display("FAIL impulse %0d", y); end
    // 2. random input against the model; the model output of sample i is
    //    compared once it has passed the 4 sections
    do_reset();
    maxerr = 0;
    for (int i = 0; i < 3000; i++) begin
      int v;
      v = $signed($urandom_range(2000)) - 1000;
      x = IN_W'(v);
      refq.push_back(model(v));
      @(negedge clk);
      if (refq.size() > 3) begin
        real r;
        r = refq.pop_front();
        checks++;
        if (fabs(y - r) > maxerr) maxerr = fabs(y - r);
        if (fabs(y - r) > 6.0) begin failures++; if (failures < 10) $display("FAIL %0d: %0d vs %f", i, y, r); end
      end
    end
    $display("max error vs real model: %f", maxerr);
    // 3. each notch frequency
    for (int s = 0; s < 4; s++) begin
      do_reset();
      peak = 0;
      for (int i = 0; i < 5000; i++) begin
        x = IN_W'($rtoi(2000.0*$sin(2.0*PI*FN[s]/FS*i)));
        @(negedge clk);
        if (i > 4000 && fabs(y) > peak) peak = fabs(y);
      end
      checks++;
      if (peak > 100.0) begin failures++; $display("FAIL notch %f MHz residual %f", FN[s], peak); end
      else $display("notch %f MHz residual %f", FN[s], peak);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #300000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
