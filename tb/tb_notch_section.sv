// Self-checking testbench of notch_section (55.2 MHz, r = 0.99, 200 MHz).
// 1. Impulse: the first output sample equals the impulse, one cycle later.
// 2. Random input: every output is compared with the same recursion run in
//    real arithmetic with exact coefficients (tolerance 4 LSB).
// 3. A sine at the notch frequency is attenuated below 5 % once settled,
//    a sine at 10 MHz passes with more than 90 % of its amplitude.
`timescale 1ns/1ps
module tb_notch_section;
  localparam int  IN_W = 14;
  localparam real F = 55.2, FS = 200.0, R = 0.99;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic signed [IN_W-1:0] x, y;
  int checks = 0, failures = 0;
  real w, rx1, rx2, ry1, ry2, ry;
  real maxerr;

  notch_section #(.IN_W(IN_W), .F_NOTCH_MHZ(F), .FS_MHZ(FS), .R(R)) dut (.clk, .rst_n, .x, .y);
  always #2.5 clk = ~clk;

  task automatic do_reset();
    rst_n = 0; x = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    rx1 = 0; rx2 = 0; ry1 = 0; ry2 = 0;
  endtask

  // drive one sample, return output of this sample (visible after the edge)
  task automatic step(input int v, output int o, output real ref_y);
    x = IN_W'(v);
    ry = v - 2.0*$cos(w)*rx1 + rx2 + 2.0*R*$cos(w)*ry1 - R*R*ry2;
    rx2 = rx1; rx1 = v; ry2 = ry1; ry1 = ry;
    @(posedge clk); @(negedge clk);
    o = int'(y); ref_y = ry;
  endtask

  function automatic real fabs(real v); return v < 0 ? -v : v; endfunction

  initial begin
    int o; real r; real peak;
    w = 2.0*PI*F/FS;
    // 1. impulse and latency
    do_reset();
    x = 14'sd1000;
    @(posedge clk); @(negedge clk);
    checks++; if (y != 14'sd1000) begin failures++; $display("FAIL impulse %0d", y); end
    x = '0;
    // 2. random versus real-arithmetic model
    do_reset();
    maxerr = 0;
    for (int i = 0; i < 3000; i++) begin
      step($signed($urandom_range(4000)) - 2000, o, r);
      checks++;
      if (fabs(o - r) > maxerr) maxerr = fabs(o - r);
      if (fabs(o - r) > 4.0 && r < 8191 && r > -8192) begin
        failures++; if (failures < 10) $display("FAIL %0d: %0d vs %f", i, o, r);
      end
    end
    $display("max error vs real model: %f", maxerr);
    // 3a. sine at the notch frequency
    do_reset();
    peak = 0;
    for (int i = 0; i < 4000; i++) begin
      step($rtoi(2000.0*$sin(w*i)), o, r);
      if (i > 3000 && fabs(o) > peak) peak = fabs(o);
    end
    checks++; if (peak > 100.0) begin failures++; $display("FAIL notch peak %f", peak); end
    $display("residual at notch: %f", peak);
    // 3b. sine at 10 MHz
    do_reset();
    peak = 0;
    for (int i = 0; i < 4000; i++) begin
      step($rtoi(2000.0*$sin(2.0*PI*10.0/FS*i)), o, r);
      if (i > 3000 && fabs(o) > peak) peak = fabs(o);
    end
    checks++; if (peak < 1800.0) begin failures++; $display("FAIL pass peak %f", peak); end
    $display("pass-band peak: %f", peak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
