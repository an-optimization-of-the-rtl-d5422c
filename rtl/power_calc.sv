// power_calc: spectral power |W_k|^2 of bins k = 1..16.
//
// For the narrow reference wavelets of the trigger (scale alpha = 0.0001)
// each wavelet draws its power from a single FFT bin, so |W_k|^2 is formed as
// |X_k|^2 times a constant weight instead of a sum over all bins. The weight
// is 1 for every bin except k = 16 (100 MHz), where the reference wavelet
// spectrum is about twice as high; that factor of 2 is a one-bit shift.
// To fit two multipliers per bin, the 20-bit FFT outputs are cut to a
// SQ_W = 16-bit bus by dropping LSBs (which bits to drop is this design's
// choice), then Re^2 + Im^2 is formed. k = 0 (DC) is not used.
//
// Timing: 2 cycles (square, then sum and weight); one result set per cycle.
module power_calc #(
  parameter int X_W  = 20,
  parameter int SQ_W = 16,
  parameter int P_W  = 2*SQ_W + 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [X_W-1:0] re [17],
  input  logic signed [X_W-1:0] im [17],
  output logic        [P_W-1:0] pw [1:16]
);
  typedef logic signed [SQ_W-1:0]   s_t;
  typedef logic        [2*SQ_W-1:0] sq_t;

  sq_t sr [1:16], si [1:16];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 1; k <= 16; k++) begin sr[k] <= '0; si[k] <= '0; pw[k] <= '0; end
    end else begin
      for (int k = 1; k <= 16; k++) begin
        s_t r, i;
        r = s_t'(re[k] >>> (X_W - SQ_W));
        i = s_t'(im[k] >>> (X_W - SQ_W));
        sr[k] <= sq_t'(r * r);
        si[k] <= sq_t'(i * i);
        if (k == 16) pw[k] <= (P_W'(sr[k]) + P_W'(si[k])) << 1;   // wavelet weight 2
        else         pw[k] <=  P_W'(sr[k]) + P_W'(si[k]);
      end
    end
  end
endmodule
