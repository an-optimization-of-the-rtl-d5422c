// wavelet_trigger_top: on-line spectral ("wavelet") trigger for radio
// detection of air showers.
//
// One 14-bit ADC sample enters per clock (200 MHz). The chain is
//   notch_cascade   four IIR notches remove narrow-band transmitters (4 cyc)
//   sample_window   newest 32 samples side by side                   (1 cyc)
//   fft32           parallel 32-point FFT, bins X0..X16              (7 cyc)
//   power_calc      |W_k|^2 = |X_k|^2 (x2 for k=16), k=1..16         (2 cyc)
//   boxcar x16      sum of the last AVG powers per bin               (1 cyc)
//   sde_trigger     peripheral minus central band power, sign test   (3 cyc)
//   capture_ctrl    1024-word profile ring, frozen 512 cycles after
//                   an accepted trigger, read back by the host
// In parallel, spark_comparator flags filter excitations with an amplitude
// threshold right after the notches; 'trig_src' selects which trigger
// freezes the profile. The profile word is the boxcar average (sum / AVG) of
// bins k = 1..15, 33 bits each.
//
// From a sample at the input to the wavelet trigger: 18 cycles (the window
// containing it is the newest one at that point). The profile word leaves
// the boxcars 3 cycles before the trigger it produces.
//
// The host (a soft processor in the reference system) is outside this
// block: it reads rd_data at rd_addr (1 cycle latency) once 'frozen' is
// high, starting at start_addr, and pulses 'arm' to record again.
//
// Parameter AVG is the boxcar length, a power of two. Its default of 16 is
// the main configuration; 32 is the longer averaging the trigger was also
// evaluated with. The boxcar sums and the SDE output grow by one bit per
// doubling; the stored profile word is always the average (sum / AVG).
module wavelet_trigger_top
  import wt_pkg::*;
#(
  parameter int unsigned AVG   = BOX_LEN,
  localparam int         BW    = P_W + $clog2(AVG),   // boxcar sum width
  localparam int         SW    = BW + 5               // SDE width
)
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [ADC_W-1:0]  adc,
  input  logic [4:0]               k_low,
  input  logic [4:0]               k_high,
  input  logic [ADC_W-2:0]         spark_thr,
  input  trig_src_t                trig_src,
  input  logic                     arm,
  input  logic [$clog2(RAM_DEPTH)-1:0] rd_addr,
  output logic [AVG_W-1:0]         rd_data [1:N_STORE],
  output logic                     frozen,
  output logic [$clog2(RAM_DEPTH)-1:0] start_addr,
  output logic [15:0]              trig_count,
  output logic signed [SW-1:0]     sde,
  output logic                     wavelet_trig,
  output logic                     spark
);
  logic signed [ADC_W-1:0] filt;
  logic signed [ADC_W-1:0] win [N_FFT];
  logic                    win_valid;
  logic signed [X_W-1:0]   xre [N_BIN], xim [N_BIN];
  logic [P_W-1:0]          pw  [1:16];
  logic [BW-1:0]           box [1:16];
  logic [PROF_W-1:0]       prof_in, prof_out;
  logic                    trig;

  notch_cascade #(.IN_W(ADC_W)) u_notch (.clk, .rst_n, .x(adc), .y(filt));

  spark_comparator #(.IN_W(ADC_W)) u_spark (.clk, .rst_n, .x(filt), .threshold(spark_thr), .spark);

  sample_window #(.IN_W(ADC_W), .N(N_FFT)) u_win (.clk, .rst_n, .din(filt), .x(win), .valid(win_valid));

  fft32 #(.IN_W(ADC_W)) u_fft (
    .clk, .rst_n, .x(win), .in_valid(win_valid), .re(xre), .im(xim), .out_valid()
  );

  power_calc #(.X_W(X_W), .SQ_W(SQ_W), .P_W(P_W)) u_pow (.clk, .rst_n, .re(xre), .im(xim), .pw);

  for (genvar k = 1; k <= 16; k++) begin : g_box
    boxcar #(.W_IN(P_W), .LEN(AVG)) u_box (.clk, .rst_n, .din(pw[k]), .sum(box[k]));
  end

  sde_trigger #(.W_IN(BW)) u_sde (.clk, .rst_n, .w(box), .k_low, .k_high, .sde, .trig(wavelet_trig));

  // profile word: boxcar averages of k = 1..15, bin k in slice k-1
  always_comb
    for (int k = 1; k <= N_STORE; k++)
      prof_in[(k-1)*AVG_W +: AVG_W] = AVG_W'(box[k] >> $clog2(AVG));

  assign trig = (trig_src == TRIG_SPARK) ? spark : wavelet_trig;

  capture_ctrl #(.W(PROF_W), .DEPTH(RAM_DEPTH), .DELAY(TRIG_DELAY)) u_cap (
    .clk, .rst_n, .din(prof_in), .trig, .arm, .raddr(rd_addr), .rdata(prof_out),
    .frozen, .start_addr, .trig_count
  );

  always_comb
    for (int k = 1; k <= N_STORE; k++) rd_data[k] = prof_out[(k-1)*AVG_W +: AVG_W];

  // the average is formed by a shift
  if (AVG < 2 || (AVG & (AVG - 1)) != 0) begin : g_bad_avg
    $error("AVG must be a power of two");
  end
endmodule
