// event_dpram: simple dual-port RAM holding the event profile.
//
// DEPTH words of W bits. The left port writes the profile continuously (one
// word per clock while 'we' is high); the right port is read by the host.
// Reads are registered (1 cycle latency); reading and writing the same
// address in one cycle returns the old word. Single clock. The 1024-word
// depth follows the trigger description; the word width is set by the user.
module event_dpram #(
  parameter int DEPTH = 1024,
  parameter int W     = 495
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
