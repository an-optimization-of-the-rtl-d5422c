// sample_window: sliding window of the newest N samples for the parallel FFT.
//
// The FFT of the wavelet engine is evaluated on every clock cycle over the
// last 32 samples, so the samples must be presented side by side. This block
// is a plain N-deep shift register: each cycle every element moves one place
// towards x[0] and the new sample enters at x[N-1] (x[N-1] newest, x[0]
// oldest; this ordering is this design's choice, only the phase of the FFT
// bins depends on it). 'valid' rises once N samples have entered since reset.
// Timing: a sample presented before clock edge t is in x[N-1] after edge t.
module sample_window #(
  parameter int IN_W = 14,
  parameter int N    = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] din,
  output logic signed [IN_W-1:0] x [N],
  output logic                   valid
);
  logic [$clog2(N+1)-1:0] fill;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) x[i] <= '0;
      fill <= '0;
    end else begin
      for (int i = 0; i < N-1; i++) x[i] <= x[i+1];
      x[N-1] <= din;
      if (fill != N[$clog2(N+1)-1:0]) fill <= fill + 1'b1;
    end
  end

  assign valid = (fill == N[$clog2(N+1)-1:0]);
endmodule
