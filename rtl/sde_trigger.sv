// sde_trigger: spectral distortion estimator and wavelet trigger.
//
// SDE = (power in the low peripheral band) + (power in the high peripheral
//       band) - (power in the central band),
// over the boxcar-integrated powers of bins k = 1..16 (6.25 MHz each).
// A bin is peripheral when k < k_low or k >= k_high, central otherwise, so
// the four band choices evaluated for the trigger are, as (k_low, k_high):
// A (3, 15), B (4, 14), C (5, 13), D (6, 13). The trigger fires when the sign
// bit of SDE is 0 (SDE >= 0): the event has an untypical spectrum. The band
// edges are run-time inputs (this design's choice).
//
// Timing: 3 cycles (sign select, 16-to-4 adder level, 4-to-1 level and sign
// test); one result per clock.
module sde_trigger #(
  parameter int W_IN = 38
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [W_IN-1:0]         w [1:16],
  input  logic [4:0]              k_low,
  input  logic [4:0]              k_high,
  output logic signed [W_IN+4:0]  sde,
  output logic                    trig
);
  localparam int SW = W_IN + 5;
  typedef logic signed [SW-1:0] s_t;

  s_t t [1:16];
  s_t q [4];
  s_t total;
  always_comb total = q[0] + q[1] + q[2] + q[3];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 1; k <= 16; k++) t[k] <= '0;
      for (int j = 0; j < 4; j++) q[j] <= '0;
      sde  <= '0;
      trig <= 1'b0;
    end else begin
      for (int k = 1; k <= 16; k++) begin
        if (5'(k) < k_low || 5'(k) >= k_high) t[k] <=  s_t'({1'b0, w[k]});
        else                                  t[k] <= -s_t'({1'b0, w[k]});
      end
      for (int j = 0; j < 4; j++) q[j] <= t[4*j+1] + t[4*j+2] + t[4*j+3] + t[4*j+4];
      sde  <= total;
      trig <= ~total[SW-1];
    end
  end
endmodule
