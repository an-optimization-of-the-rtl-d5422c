// Workload testbench: the four outer-band choices (variants A..D) evaluated
// for the spectral trigger, run on the complete wavelet_trigger_top twice
// over the same samples: at its default boxcar length of 16 and with
// AVG = 32, the two averaging lengths the trigger was evaluated with.
//
// Background: a 50 MHz tone (bin 8, central in every variant) plus noise.
// For every variant and for bursts centred on bin_k 2, 3, 4, 5, 13, 14 and 15
// (12.5 ... 93.75 MHz, Gaussian envelope, peak 1500 counts), the trigger must
// fire exactly when the burst bin lies in that variant's outer band:
//   A: k <= 2 or k >= 15     B: k <= 3 or k >= 14
//   C: k <= 4 or k >= 13     D: k <= 5 or k >= 13
// A 50.62 MHz pulse under a Gaussian bell (the laboratory test pulse) must
// not fire in any variant. Both instances must give these outcomes. After
// each trigger the testbench waits for the freeze and rearms the instance
// that fired. For the AVG = 32 instance it also checks that the stored
// profile word is the 32-sample average: its bins sum to 1/32 of the
// boxcar total, which is compared with the same window of the AVG = 16
// instance (two consecutive 16-sample windows).
`timescale 1ns/1ps
module tb_top_band_variants;
  import wt_pkg::*;
  localparam real PI = 3.14159265358979323846;
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

  // second instance, 32-sample boxcar; shares the inputs
  logic        arm32;
  logic [9:0]  start_addr32;
  logic [AVG_W-1:0] rd_data32 [1:N_STORE];
  logic        frozen32, wavelet_trig32, spark32;
  logic [15:0] trig_count32;
  logic signed [SDE_W:0] sde32;
  wavelet_trigger_top #(.AVG(32)) dut32 (
    .clk, .rst_n, .adc, .k_low, .k_high, .spark_thr, .trig_src, .arm(arm32),
    .rd_addr, .rd_data(rd_data32), .frozen(frozen32), .start_addr(start_addr32),
    .trig_count(trig_count32), .sde(sde32), .wavelet_trig(wavelet_trig32),
    .spark(spark32)
  );
  always #2.5 clk = ~clk;

  int checks = 0, failures = 0, n_fired = 0, n_quiet = 0, n_fired32 = 0, n_quiet32 = 0;
  int cyc = 0;
  real b_amp = 0.0, b_f = 0.0;
  int  b_t0 = -100000;

  always @(negedge clk) begin
    real v, e;
    e = (cyc - b_t0) / 20.0;
    v = 800.0*$sin(2.0*PI*50.0/200.0*cyc) + real'($signed($urandom_range(100)) - 50)
      + b_amp * $exp(-0.5*e*e) * $cos(2.0*PI*b_f/200.0*cyc);
    adc <= ADC_W'($rtoi(v));
    cyc++;
  end

  // Sum of all stored bins of the AVG = 16 instance's boxcars at the
  // current cycle and 16 cycles earlier, taken from inside the instance.
  logic [AVG_W+4:0] tot16_now, tot16_hist [16];
  int n_prof = 0;
  always_comb begin
    tot16_now = '0;
    for (int k = 1; k <= N_STORE; k++) tot16_now += (AVG_W+5)'(dut.box[k]);
  end
  always @(posedge clk) begin
    for (int i = 15; i > 0; i--) tot16_hist[i] <= tot16_hist[i-1];
    tot16_hist[0] <= tot16_now;
  end
  // The AVG = 32 instance's profile word written this cycle: its stored
  // averages, times 32, must equal the two 16-sample totals to within the
  // truncation of each of the 15 averages (at most 31 each).
  always @(negedge clk) begin
    if (rst_n && cyc > 100 && !frozen32 && (cyc % 97) == 0) begin
      logic [AVG_W+9:0] s32, ref_t;
      s32 = '0;
      for (int k = 1; k <= N_STORE; k++) s32 += (AVG_W+10)'(dut32.prof_in[(k-1)*AVG_W +: AVG_W]);
      s32 = s32 << 5;
      ref_t = (AVG_W+10)'(tot16_now) + (AVG_W+10)'(tot16_hist[15]);
      checks++; n_prof++;
      if (s32 > ref_t || ref_t - s32 > 31*N_STORE) begin
        failures++;
        $display("FAIL cyc %0d: AVG=32 profile x32 = %0d, two 16-sample totals = %0d", cyc, s32, ref_t);
      end
    end
  end

  // One trial: a Gaussian burst at f_mhz, then the outcome of both
  // instances is compared with 'expect_fire'.
  task automatic run_burst(input real f_mhz, input bit expect_fire, input string what);
    logic [15:0] tc0, tc0_32;
    bit f16, f32;
    tc0 = trig_count; tc0_32 = trig_count32;
    b_f = f_mhz; b_amp = 1500.0; b_t0 = cyc + 60;    // envelope peak 60 cycles ahead
    repeat (200) @(negedge clk);
    b_amp = 0.0;
    f16 = (trig_count != tc0);
    f32 = (trig_count32 != tc0_32);
    checks += 2;
    if (f16 != expect_fire) begin
      failures++; $display("FAIL AVG=16 %s: fired=%0b expected %0b", what, f16, expect_fire);
    end
    if (f32 != expect_fire) begin
      failures++; $display("FAIL AVG=32 %s: fired=%0b expected %0b", what, f32, expect_fire);
    end
    if (f16) n_fired++; else n_quiet++;
    if (f32) n_fired32++; else n_quiet32++;
    if (f16 || f32) begin
      while ((f16 && !frozen) || (f32 && !frozen32)) @(negedge clk);
      arm = f16; arm32 = f32; @(negedge clk); arm = 0; arm32 = 0;
      repeat (600) @(negedge clk);            // refill the record before the next trial
    end else
      repeat (100) @(negedge clk);
  endtask

  initial begin
    int kl [4] = '{3, 4, 5, 6};
    int kh [4] = '{15, 14, 13, 13};
    int bin_k [7] = '{2, 3, 4, 5, 13, 14, 15};
    string vname [4] = '{"A", "B", "C", "D"};
    k_low = 5'd3; k_high = 5'd15; spark_thr = '1; trig_src = TRIG_WAVELET;
    arm = 0; arm32 = 0; rd_addr = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (700) @(negedge clk);
    for (int v = 0; v < 4; v++) begin
      k_low = 5'(kl[v]); k_high = 5'(kh[v]);
      repeat (100) @(negedge clk);
      for (int b = 0; b < 7; b++) begin
        bit expect_fire;
        expect_fire = (bin_k[b] < kl[v]) || (bin_k[b] >= kh[v]);
        run_burst(6.25 * bin_k[b], expect_fire, $sformatf("variant %s, bin %0d", vname[v], bin_k[b]));
      end
      // the laboratory test pulse: 50.62 MHz under a Gaussian bell, a
      // typical shower-like spectrum, must not fire in any variant
      run_burst(50.62, 1'b0, $sformatf("variant %s, 50.62 MHz pulse", vname[v]));
    end
    $display("AVG=16: bursts that fired: %0d, bursts that stayed quiet: %0d", n_fired, n_quiet);
    $display("AVG=32: bursts that fired: %0d, bursts that stayed quiet: %0d", n_fired32, n_quiet32);
    $display("AVG=32 profile words checked: %0d", n_prof);
    checks++;
    if (n_fired == 0 || n_quiet == 0 || n_fired32 == 0 || n_quiet32 == 0 || n_prof == 0) begin
      failures++; $display("FAIL: both outcomes must occur in both instances");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5.0 * 80000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
