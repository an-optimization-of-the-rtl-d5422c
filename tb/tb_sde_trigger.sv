// Self-checking testbench of sde_trigger. Random bin powers with band edges
// of the four evaluated variants (A..D) and random edges; three cycles later
// sde must equal (sum of peripheral bins) - (sum of central bins) and trig
// must be (sde >= 0). Includes inputs that make SDE exactly 0.
`timescale 1ns/1ps
module tb_sde_trigger;
  localparam int W_IN = 38;
  logic clk = 0, rst_n = 0;
  logic [W_IN-1:0] w [1:16];
  logic [4:0] k_low, k_high;
  logic signed [W_IN+4:0] sde;
  logic trig;
  int checks = 0, failures = 0, ntrig = 0;
  longint eq [$];
  int kl [4] = '{3, 4, 5, 6};
  int kh [4] = '{15, 14, 13, 13};

  sde_trigger #(.W_IN(W_IN)) dut (.clk, .rst_n, .w, .k_low, .k_high, .sde, .trig);
  always #2.5 clk = ~clk;

  initial begin
    for (int k = 1; k <= 16; k++) w[k] = '0;
    k_low = 5'd6; k_high = 5'd13;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      longint e;
      int lo, hi, mode;
      mode = i % 6;
      if (mode < 4) begin lo = kl[mode]; hi = kh[mode]; end
      else begin lo = $urandom_range(17); hi = $urandom_range(17); end
      k_low = 5'(lo); k_high = 5'(hi);
      e = 0;
      for (int k = 1; k <= 16; k++) begin
        longint v;
        if (i % 7 == 0) v = 1000;                      // flat spectrum
        else if (i % 11 == 0) v = longint'({W_IN{1'b1}});
        else v = longint'($urandom) << ($urandom_range(6));
        w[k] = W_IN'(v);
        if (k < lo || k >= hi) e += v; else e -= v;
      end
      eq.push_back(e);
      @(negedge clk);
      if (eq.size() > 2) begin
        longint x;
        x = eq.pop_front();
        checks += 2;
        if (longint'(sde) != x) begin failures++; if (failures < 10) $display("FAIL i=%0d sde=%0d exp %0d", i, sde, x); end
        if (trig != (x >= 0)) begin failures++; if (failures < 10) $display("FAIL i=%0d trig=%0b exp sde %0d", i, trig, x); end
        if (trig) ntrig++;
      end
    end
    checks++;
    if (ntrig == 0 || ntrig == checks/2) begin failures++; $display("FAIL trigger never toggled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
