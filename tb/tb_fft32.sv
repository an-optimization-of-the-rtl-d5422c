// Self-checking testbench of fft32.
// Streams one new 32-sample window per clock (random, full-scale constant,
// full-scale alternating and full-scale cosines) and compares every output
// bin with a DFT evaluated in real arithmetic inside the testbench. Bins
// k = 4, 6, 8 are compared with the conjugate sign of the imaginary part,
// as the flow graph defines them. Tolerance: 8 LSB per component. Also checks
// that the first result appears exactly 7 cycles after the first window.
`timescale 1ns/1ps
module tb_fft32;
  localparam int IN_W = 14;
  localparam int NWIN = 400;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0;
  logic signed [IN_W-1:0] x [32];
  logic in_valid;
  logic signed [IN_W+5:0] re [17], im [17];
  logic out_valid;
  int checks = 0, failures = 0;
  int win [NWIN][32];
  int cyc = 0, first_in = -1, first_out = -1, nout = 0;
  real maxerr = 0.0;

  fft32 dut (.clk, .rst_n, .x, .in_valid, .re, .im, .out_valid);

  always #2.5 clk = ~clk;

  function automatic int gen(int w, int n);
    case (w)
      0: return -8192;
      1: return (n % 2 == 0) ? 8191 : -8192;
      2: return 8191;
      default:
        if (w < 20) return $rtoi(8191.0 * $cos(2.0*PI*(w-3)*n/32.0));
        else return $signed($urandom_range(16383)) - 8192;
    endcase
  endfunction

  initial begin
    for (int w = 0; w < NWIN; w++)
      for (int n = 0; n < 32; n++) win[w][n] = gen(w, n);
  end

  // driver
  int widx = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
  end
  initial begin
    in_valid = 0;
    for (int n = 0; n < 32; n++) x[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (widx = 0; widx < NWIN; widx++) begin
      for (int n = 0; n < 32; n++) x[n] = IN_W'(win[widx][n]);
      in_valid = 1;
      if (widx == 0) first_in = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (12) @(negedge clk);
    if (nout != NWIN) begin failures++; $display("FAIL: %0d outputs, expected %0d", nout, NWIN); end
    checks++;
    if (first_out - first_in != 7) begin failures++; $display("FAIL: latency %0d", first_out - first_in); end
    checks++;
    $display("max abs error %f LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker (sampled in the middle of the cycle)
  always @(negedge clk) if (rst_n && out_valid) begin
    if (first_out < 0) first_out = cyc;
    for (int k = 0; k <= 16; k++) begin
      real sr, si, er, ei;
      sr = 0.0; si = 0.0;
      for (int n = 0; n < 32; n++) begin
        sr += win[nout][n] * $cos(2.0*PI*k*n/32.0);
        si -= win[nout][n] * $sin(2.0*PI*k*n/32.0);
      end
      if (k == 4 || k == 6 || k == 8) si = -si;
      er = sr - re[k]; ei = si - im[k];
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (er > maxerr) maxerr = er;
      if (ei > maxerr) maxerr = ei;
      checks += 2;
      if (er > 8.0 || ei > 8.0) begin
        failures++;
        if (failures < 10) $display("FAIL win %0d k %0d: got %0d,%0d exp %f,%f", nout, k, re[k], im[k], sr, si);
      end
    end
    nout++;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
