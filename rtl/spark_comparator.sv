// spark_comparator: amplitude trigger placed right after the notch filters.
//
// Raises 'spark' for one cycle for every sample whose magnitude exceeds
// 'threshold'. It catches filter excitations ("sparks") whose amplitude is
// far above any real input signal. Comparing |x| > threshold with a run-time
// threshold is this design's choice. Registered output: 1 cycle latency.
module spark_comparator #(
  parameter int IN_W = 14
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] x,
  input  logic        [IN_W-2:0] threshold,
  output logic                   spark
);
  logic [IN_W-1:0] mag;
  always_comb mag = x[IN_W-1] ? IN_W'(-x) : IN_W'(x);   // |-2^(IN_W-1)| fits unsigned

  always_ff @(posedge clk) begin
    if (!rst_n) spark <= 1'b0;
    else        spark <= (mag > {1'b0, threshold});
  end
endmodule
