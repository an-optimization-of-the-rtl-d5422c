// boxcar: running sum of the last LEN samples of one power channel.
//
// The spectral power of each bin is integrated by a boxcar over 16 samples
// (80 ns at 200 MHz). The block keeps the last LEN inputs in a register
// chain and updates an accumulator with sum += new - oldest, so one adder and
// one subtractor serve any LEN. The sum is not divided by LEN here.
// Timing: 1 cycle latency; after reset the chain and sum are zero, so the
// first LEN-1 outputs are partial sums.
module boxcar #(
  parameter int W_IN = 34,
  parameter int LEN  = 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [W_IN-1:0]                    din,
  output logic [W_IN+$clog2(LEN)-1:0]        sum
);
  localparam int SW = W_IN + $clog2(LEN);
  logic [W_IN-1:0] chain [LEN];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LEN; i++) chain[i] <= '0;
      sum <= '0;
    end else begin
      chain[0] <= din;
      for (int i = 1; i < LEN; i++) chain[i] <= chain[i-1];
      sum <= sum + SW'(din) - SW'(chain[LEN-1]);
    end
  end
endmodule
