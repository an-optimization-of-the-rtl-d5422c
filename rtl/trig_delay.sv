// trig_delay: delay line of DEPTH cycles built on a RAM.
//
// The trigger is held back by 512 cycles before it freezes the profile
// memory, so that the frozen record holds the samples before and after the
// trigger. The delay is a circular buffer read and written at the same
// address each cycle (read-before-write), the usual RAM-based shift
// register. The RAM is not reset; instead dout is held at 0 until the
// buffer has been written once all the way round after reset.
// Timing: din sampled at edge t appears on dout after edge t + DEPTH.
module trig_delay #(
  parameter int DEPTH = 512,
  parameter int W     = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] ptr;
  logic          wrapped, primed;
  logic [W-1:0]  rd;

  always_ff @(posedge clk) begin
    rd       <= mem[ptr];
    mem[ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr     <= '0;
      wrapped <= 1'b0;
      primed  <= 1'b0;
    end else begin
      ptr <= (ptr == AW'(DEPTH-1)) ? '0 : ptr + 1'b1;
      if (ptr == AW'(DEPTH-1)) wrapped <= 1'b1;
      primed <= wrapped;      // first read of a written word is one edge later
    end
  end

  assign dout = primed ? rd : '0;
endmodule
