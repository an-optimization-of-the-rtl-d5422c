// End-to-end testbench of wavelet_trigger_top at its default parameters.
//
// Stimulus: a "typical" radio signal (50 MHz tone, bin 8) with noise, a
// narrow-band transmitter at 27.12 MHz that the notch filters must remove,
// "untypical" bursts at 93.75 MHz and 100 MHz, and one large spike for the
// spark trigger.
// Reference: every cycle the testbench takes the notch output, evaluates a
// 32-point DFT in real arithmetic, forms |X_k|^2 / 256 (the 16-bit bus cut),
// weights k = 16 by 2, sums 16 windows and forms the SDE for the selected
// band edges. The DUT's SDE must agree within 1 % of the total power plus a
// small offset, and its sign must agree wherever the reference is clearly
// away from 0. The same reference run on the raw ADC samples shows that the
// transmitter alone would have fired the trigger.
// Mechanisms counted (each must occur): transmitter trigger suppressed by
// the notches, wavelet trigger, freeze 513 cycles after acceptance, trigger
// ignored while pending, profile read-back, rearm, x2 weight of bin 16,
// spark trigger. Profile words read back are compared with a mirror of every
// RAM write.
`timescale 1ns/1ps
module tb_wavelet_trigger_top;
  import wt_pkg::*;
  localparam real PI = 3.14159265358979323846;
  localparam int  NCYC = 16000;
  logic clk = 0, rst_n = 0;
  logic signed [ADC_W-1:0] adc;
  logic [4:0] k_low, k_high;
  logic [ADC_W-2:0] spark_thr;
  trig_src_t trig_src;
  logic arm;
  logic [9:0] rd_addr, start_addr;
  logic [AVG_W-1:0] rd_data [1:N_STORE];
  logic frozen, wavelet_trig, spark;
  logic [15:0] trig_count;
  logic signed [SDE_W-1:0] sde;

  wavelet_trigger_top dut (.*);

  always #2.5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_notch_suppr = 0, n_wav_trig = 0, n_freeze = 0, n_pending_ign = 0, n_readback = 0;
  int n_rearm = 0, n_k16 = 0, n_spark = 0, n_sde_cmp = 0;

  real ctab [17][32], stab [17][32];
  real fhist [NCYC], rhist [NCYC];      // notch output and raw ADC, by negedge index
  real pwin_f [NCYC], pwin_r [NCYC];    // per-window SDE contribution
  real tot_f [NCYC];                    // per-window total power
  int  cyc = 0;

  // RAM mirror
  logic [PROF_W-1:0] mirror [RAM_DEPTH];
  always @(posedge clk) if (rst_n && dut.u_cap.we) mirror[dut.u_cap.wptr] <= dut.prof_in;

  function automatic bit periph(int k);
    return (k < int'(k_low)) || (k >= int'(k_high));
  endfunction

  // SDE contribution and total power of one 32-sample window ending at j
  task automatic window_power(ref real h [NCYC], input int j, output real sdec, output real tot);
    sdec = 0; tot = 0;
    for (int k = 1; k <= 16; k++) begin
      real sr, si, p;
      sr = 0; si = 0;
      for (int n = 0; n < 32; n++) begin
        sr += h[j-31+n] * ctab[k][n];
        si -= h[j-31+n] * stab[k][n];
      end
      p = (sr*sr + si*si) / 256.0;
      if (k == 16) p = 2.0 * p;
      tot += p;
      sdec += periph(k) ? p : -p;
    end
  endtask

  function automatic real fabs(real v); return v < 0 ? -v : v; endfunction

  // per-cycle reference and comparison, at the negedge
  always @(negedge clk) if (rst_n) begin
    fhist[cyc] = real'(dut.filt);
    rhist[cyc] = real'(adc);
    if (cyc >= 31) begin
      window_power(fhist, cyc, pwin_f[cyc], tot_f[cyc]);
      begin real dummy; window_power(rhist, cyc, pwin_r[cyc], dummy); end
    end
    // the DUT's SDE at this negedge covers windows ending at cyc-29 .. cyc-14
    if (cyc >= 31 + 29) begin
      real rf, rr, tt, d;
      rf = 0; rr = 0; tt = 0;
      for (int j = cyc-29; j <= cyc-14; j++) begin rf += pwin_f[j]; rr += pwin_r[j]; tt += tot_f[j]; end
      d = real'(sde) - rf;
      checks++; n_sde_cmp++;
      if (fabs(d) > 0.01*tt + 2000.0) begin
        failures++;
        if (failures < 10) $display("FAIL cyc %0d: sde %0d ref %f total %f", cyc, sde, rf, tt);
      end
      if (fabs(rf) > 0.05*tt && tt > 1e5) begin
        checks++;
        if ((sde >= 0) != (rf >= 0)) begin failures++; if (failures < 10) $display("FAIL sign cyc %0d", cyc); end
      end
      // transmitter would trigger on raw ADC data, not after the notches
      if (rr > 0.05*tt && rf < 0 && !wavelet_trig) n_notch_suppr++;
    end
    cyc++;
  end

  // k=16 weighting check: pw[16] one edge after sr/si equals 2*(sr+si)
  longint last_sum16 = 0;
  bit last_valid = 0;
  always @(negedge clk) if (rst_n) begin
    if (last_valid) begin
      checks++;
      if (longint'(dut.pw[16]) != 2*last_sum16) begin failures++; if (failures < 10) $display("FAIL k16 weight"); end
      if (last_sum16 > 1000) n_k16++;
    end
    last_sum16 = longint'(dut.u_pow.sr[16]) + longint'(dut.u_pow.si[16]);
    last_valid = 1;
  end

  // stimulus
  real tx_amp = 0, hi_amp = 0, f_hi = 93.75, spike = 0;
  always @(negedge clk) begin
    real v;
    int n;
    n = cyc;
    v = 800.0*$sin(2.0*PI*50.0/200.0*n) + real'($signed($urandom_range(100)) - 50)
      + tx_amp*$sin(2.0*PI*27.12/200.0*n) + hi_amp*$cos(2.0*PI*f_hi/200.0*n) + spike;
    if (v > 8191) v = 8191;
    if (v < -8192) v = -8192;
    adc <= ADC_W'($rtoi(v));
  end

  task automatic wait_cycles(int n); repeat (n) @(negedge clk); endtask

  task automatic read_profile(input int tag);
    int bad = 0;
    logic [9:0] a;
    for (int j = 0; j < RAM_DEPTH; j++) begin
      a = start_addr + 10'(j);
      rd_addr = a;
      @(negedge clk);
      for (int k = 1; k <= N_STORE; k++)
        if (rd_data[k] != mirror[a][(k-1)*AVG_W +: AVG_W]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL profile %0d: %0d words differ", tag, bad); end
    else n_readback++;
  endtask

  // reads the profile 32 words after the trigger word (offset DEPTH-DELAY-2),
  // when the boxcars are filled with the burst
  task automatic trig_word(output longint b8, output longint b15);
    rd_addr = start_addr + 10'(RAM_DEPTH - TRIG_DELAY - 2 + 32);
    @(negedge clk);
    b8 = longint'(rd_data[8]); b15 = longint'(rd_data[15]);
  endtask

  task automatic wait_freeze(input int accept_cyc, input string what);
    int t0;
    t0 = cyc;
    while (!frozen && cyc - t0 < 2000) @(negedge clk);
    checks++;
    if (!frozen) begin failures++; $display("FAIL %s: no freeze", what); end
    else begin
      n_freeze++;
      if (cyc - accept_cyc != TRIG_DELAY + 1) begin failures++; $display("FAIL %s: freeze after %0d", what, cyc - accept_cyc); end
    end
  endtask

  int accept_cyc = -1;
  logic [15:0] tc_prev = 0;
  always @(negedge clk) if (rst_n) begin
    if (trig_count != tc_prev) accept_cyc = cyc;
    tc_prev = trig_count;
  end

  initial begin
    longint b8, b15;
    int t_burst, t_trig;
    for (int k = 0; k <= 16; k++)
      for (int n = 0; n < 32; n++) begin
        ctab[k][n] = $cos(2.0*PI*k*n/32.0);
        stab[k][n] = $sin(2.0*PI*k*n/32.0);
      end
    k_low = 5'd6; k_high = 5'd13;           // variant D band edges
    tx_amp = 2500.0;
    spark_thr = 13'd6000;
    trig_src = TRIG_WAVELET;
    arm = 0; rd_addr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // phase 0: typical signal plus a strong 27.12 MHz transmitter, which
    // stays on for the whole run
    wait_cycles(3000);
    checks++;
    if (trig_count != 0) begin failures++; $display("FAIL transmitter triggered"); end

    // phase 1: untypical burst at 93.75 MHz
    t_burst = cyc;
    hi_amp = 1500.0;
    while (!wavelet_trig && cyc - t_burst < 200) @(negedge clk);
    t_trig = cyc;
    checks++;
    if (!wavelet_trig || t_trig - t_burst < 14 || t_trig - t_burst > 40) begin
      failures++; $display("FAIL wavelet trigger after %0d cycles", t_trig - t_burst);
    end else n_wav_trig++;
    wait_cycles(100);
    hi_amp = 0.0;
    // the burst keeps the trigger high: later triggers must not be accepted
    checks++;
    if (trig_count == 1) n_pending_ign++; else begin failures++; $display("FAIL trig_count %0d", trig_count); end
    wait_freeze(accept_cyc, "burst 93.75");
    read_profile(1);
    trig_word(b8, b15);
    checks++;
    if (b15 <= b8) begin failures++; $display("FAIL profile: bin15 %0d <= bin8 %0d", b15, b8); end
    wait_cycles(500);
    checks++;
    if (!frozen) begin failures++; $display("FAIL unfrozen without arm"); end

    // phase 2: rearm, burst at 100 MHz (bin 16, weight 2)
    arm = 1; @(negedge clk); arm = 0; n_rearm++;
    wait_cycles(1200);
    checks++;
    if (frozen || trig_count != 1) begin failures++; $display("FAIL after rearm"); end
    f_hi = 100.0; hi_amp = 1200.0;
    wait_cycles(60);
    hi_amp = 0.0;
    checks++;
    if (trig_count == 2) n_wav_trig++; else begin failures++; $display("FAIL 100 MHz burst not accepted"); end
    wait_freeze(accept_cyc, "burst 100");
    read_profile(2);

    // phase 3: spark trigger
    arm = 1; trig_src = TRIG_SPARK; @(negedge clk); arm = 0; n_rearm++;
    wait_cycles(1200);
    checks++;
    if (trig_count != 2) begin failures++; $display("FAIL spark mode fired on normal signal"); end
    spike = 7500.0; @(negedge clk); spike = 0.0;
    wait_cycles(10);
    checks++;
    if (trig_count == 3) n_spark++; else begin failures++; $display("FAIL spark not accepted"); end
    wait_freeze(accept_cyc, "spark");
    read_profile(3);

    $display("mechanisms: notch_suppressed=%0d wavelet_trig=%0d freeze=%0d pending_ignored=%0d readback=%0d rearm=%0d k16_weight=%0d spark=%0d sde_compared=%0d",
             n_notch_suppr, n_wav_trig, n_freeze, n_pending_ign, n_readback, n_rearm, n_k16, n_spark, n_sde_cmp);
    if (n_notch_suppr == 0) begin failures++; $display("FAIL mechanism notch suppression never seen"); end
    if (n_wav_trig == 0)    begin failures++; $display("FAIL mechanism wavelet trigger never seen"); end
    if (n_freeze == 0)      begin failures++; $display("FAIL mechanism freeze never seen"); end
    if (n_pending_ign == 0) begin failures++; $display("FAIL mechanism pending-ignore never seen"); end
    if (n_readback == 0)    begin failures++; $display("FAIL mechanism readback never seen"); end
    if (n_rearm == 0)       begin failures++; $display("FAIL mechanism rearm never seen"); end
    if (n_k16 == 0)         begin failures++; $display("FAIL mechanism k16 weight never seen"); end
    if (n_spark == 0)       begin failures++; $display("FAIL mechanism spark never seen"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5.0 * (NCYC - 10));
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
