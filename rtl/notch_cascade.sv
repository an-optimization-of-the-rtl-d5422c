// notch_cascade: four IIR notch sections in series.
//
// A radio station removes four narrow-band transmitters before the trigger;
// the default notch frequencies are 27.12, 40.9, 55.2 and 70.7 MHz at a
// 200 MHz sample rate with pole radius r = 0.99, in that order. Each section
// is a notch_section with one cycle of latency, so the cascade has 4 cycles
// of latency and accepts one sample per clock.
module notch_cascade #(
  parameter int  IN_W   = 14,
  parameter real F1_MHZ = 27.12,
  parameter real F2_MHZ = 40.9,
  parameter real F3_MHZ = 55.2,
  parameter real F4_MHZ = 70.7,
  parameter real FS_MHZ = 200.0,
  parameter real R      = 0.99
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] x,
  output logic signed [IN_W-1:0] y
);
  logic signed [IN_W-1:0] s1, s2, s3;

  notch_section #(.IN_W(IN_W), .F_NOTCH_MHZ(F1_MHZ), .FS_MHZ(FS_MHZ), .R(R)) u_n1 (.clk, .rst_n, .x(x),  .y(s1));
  notch_section #(.IN_W(IN_W), .F_NOTCH_MHZ(F2_MHZ), .FS_MHZ(FS_MHZ), .R(R)) u_n2 (.clk, .rst_n, .x(s1), .y(s2));
  notch_section #(.IN_W(IN_W), .F_NOTCH_MHZ(F3_MHZ), .FS_MHZ(FS_MHZ), .R(R)) u_n3 (.clk, .rst_n, .x(s2), .y(s3));
  notch_section #(.IN_W(IN_W), .F_NOTCH_MHZ(F4_MHZ), .FS_MHZ(FS_MHZ), .R(R)) u_n4 (.clk, .rst_n, .x(s3), .y(y));
endmodule
