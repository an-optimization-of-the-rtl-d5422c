// notch_section: one second-order IIR notch filter at one sample per clock.
//
// Implements the notch recursion used in front of the trigger to remove a
// narrow-band radio transmitter,
//   y_i = x_i - 2cos(w) x_{i-1} + x_{i-2} + 2r cos(w) y_{i-1} - r^2 y_{i-2},
// with w = 2 pi F_NOTCH_MHZ / FS_MHZ and pole radius R (0.99 by default).
// The zeros sit on the unit circle at +-w, the poles at radius R on the same
// angle, so the band around F_NOTCH is rejected and the rest passes with
// gain close to 1.
//
// Fixed point (this design's choice): the three coefficients are computed at
// elaboration as signed COEF_W-bit numbers with COEF_FRAC fractional bits.
// The feedback state y_{i-1}, y_{i-2} carries Y_FRAC extra fractional bits
// and 4 extra integer bits, so a filter ringing at several times the input
// amplitude is represented; the state saturates instead of wrapping. The
// output is rounded and saturated back to IN_W bits.
//
// Timing: x is sampled at a clock edge and the matching y appears after the
// same edge (1 cycle latency); the whole recursion is one cycle deep.
// Synchronous active-low reset clears the state.
module notch_section #(
  parameter int  IN_W        = 14,
  parameter real F_NOTCH_MHZ = 55.2,
  parameter real FS_MHZ      = 200.0,
  parameter real R           = 0.99,
  parameter int  COEF_W      = 20,
  parameter int  COEF_FRAC   = 17,
  parameter int  Y_FRAC      = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] x,
  output logic signed [IN_W-1:0] y
);
  import wt_pkg::fx, wt_pkg::PI;

  localparam int YW = IN_W + 4 + Y_FRAC;        // state width
  localparam int AW = YW + COEF_W + 2;          // accumulator width
  typedef logic signed [COEF_W-1:0] c_t;
  typedef logic signed [YW-1:0]     y_t;
  typedef logic signed [AW-1:0]     acc_t;

  localparam real W  = 2.0 * PI * F_NOTCH_MHZ / FS_MHZ;
  localparam c_t C_B1 = c_t'(fx(2.0 * $cos(W),     COEF_FRAC));   // 2cos(w)
  localparam c_t C_A1 = c_t'(fx(2.0 * R * $cos(W), COEF_FRAC));   // 2r cos(w)
  localparam c_t C_A2 = c_t'(fx(R * R,             COEF_FRAC));   // r^2

  localparam acc_t Y_MAX = acc_t'({1'b0, {(YW-1){1'b1}}});
  localparam acc_t Y_MIN = -Y_MAX - 1;

  logic signed [IN_W-1:0] x1, x2;
  y_t y1, y2;
  acc_t acc, ff, fb;
  y_t ynext;

  always_comb begin
    // feed-forward part, aligned to the Y_FRAC fractional bits of the state
    ff  = (acc_t'(x) <<< (COEF_FRAC + Y_FRAC))
        - ((acc_t'(C_B1) * acc_t'(x1)) <<< Y_FRAC)
        + (acc_t'(x2) <<< (COEF_FRAC + Y_FRAC));
    // feedback part
    fb  = acc_t'(C_A1) * acc_t'(y1) - acc_t'(C_A2) * acc_t'(y2);
    acc = (ff + fb + (acc_t'(1) <<< (COEF_FRAC-1))) >>> COEF_FRAC;
    if (acc > Y_MAX)      ynext = y_t'(Y_MAX);
    else if (acc < Y_MIN) ynext = y_t'(Y_MIN);
    else                  ynext = y_t'(acc);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x1 <= '0; x2 <= '0; y1 <= '0; y2 <= '0;
    end else begin
      x1 <= x; x2 <= x1;
      y1 <= ynext; y2 <= y1;
    end
  end

  // output: round away the fractional bits and saturate to IN_W
  localparam y_t O_MAX = y_t'((1 <<< (IN_W-1)) - 1);
  localparam y_t O_MIN = y_t'(-(1 <<< (IN_W-1)));
  y_t yr;
  always_comb begin
    yr = (y1 + y_t'(1 <<< (Y_FRAC-1))) >>> Y_FRAC;
    if (yr > O_MAX)      y = O_MAX[IN_W-1:0];
    else if (yr < O_MIN) y = O_MIN[IN_W-1:0];
    else                 y = yr[IN_W-1:0];
  end
endmodule
