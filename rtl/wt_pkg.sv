// Shared constants, types and fixed-point helpers of the wavelet trigger.
//
// The trigger runs at one ADC sample per clock (200 MHz in the reference
// system). A 32-point FFT of the newest 32 samples is formed every cycle;
// bins k = 1..16 (6.25 MHz apart) feed the power, boxcar and SDE stages.
// The widths follow the description of the engine: 14-bit ADC samples, one
// extra bit per FFT stage up to 20-bit FFT outputs, and a 16-bit bus into
// the squarers. Power, boxcar and SDE word widths are this design's own
// choice, sized so that nothing can overflow.
package wt_pkg;

  localparam int ADC_W   = 14;            // ADC sample width
  localparam int N_FFT   = 32;            // FFT length
  localparam int N_BIN   = 17;            // X0..X16 (real input: the rest mirror)
  localparam int X_W     = ADC_W + 6;     // FFT output width (20)
  localparam int SQ_W    = 16;            // bus width into the squarers
  localparam int P_W     = 2*SQ_W + 2;    // |W_k|^2 incl. the x2 weight of k=16
  localparam int BOX_LEN = 16;            // boxcar length
  localparam int BOX_W   = P_W + $clog2(BOX_LEN);  // boxcar sum width
  localparam int SDE_W   = BOX_W + 5;     // signed sum of 16 boxcar sums
  localparam int N_STORE = 15;            // bins k=1..15 stored per profile word
  localparam int AVG_W   = P_W - 1;       // boxcar average (sum/16) width, 33 bits
  localparam int PROF_W  = N_STORE*AVG_W; // profile word width
  localparam int RAM_DEPTH = 1024;        // profile memory depth
  localparam int TRIG_DELAY = 512;        // trigger delay in cycles

  localparam real PI = 3.14159265358979323846;

  // Signed fixed-point constant: round(v * 2^frac).
  function automatic int fx(input real v, input int frac);
    real s;
    s = v * (2.0 ** frac);
    return (s >= 0.0) ? $rtoi(s + 0.5) : -$rtoi(-s + 0.5);
  endfunction

  typedef enum logic {TRIG_WAVELET = 1'b0, TRIG_SPARK = 1'b1} trig_src_t;

endpackage
