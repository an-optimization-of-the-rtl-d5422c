// capture_ctrl: freezes the profile of a triggered event for the host.
//
// The profile words (averaged powers of the stored bins) are written on
// every clock into a DEPTH-word dual-port RAM used as a ring buffer. An
// accepted trigger is not acted on at once: it travels through a DELAY-cycle
// RAM-based delay line (trig_delay), and only when it comes out is writing
// stopped. With DEPTH = 1024 and DELAY = 512 the frozen ring holds about half
// a record before and half after the trigger. The host then reads the record
// through the second RAM port, starting at 'start_addr' (the oldest word),
// and pulses 'arm' to resume recording.
//
// States (this design's choice): ARMED (recording, trigger accepted),
// PENDING (recording, one trigger in the delay line; further triggers are
// ignored), FROZEN (writes stopped, waiting for 'arm'). After arming, a
// trigger is accepted only once DELAY words have been written, so the whole
// record is newer than the arm. The trigger word lands at offset
// DEPTH - DELAY - 2 from start_addr (510 for the defaults).
//
// Timing: rdata is registered (1 cycle after raddr). 'frozen' rises
// DELAY + 1 cycles after the trigger was accepted.
module capture_ctrl #(
  parameter int W     = 495,
  parameter int DEPTH = 1024,
  parameter int DELAY = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [W-1:0]             din,
  input  logic                     trig,
  input  logic                     arm,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata,
  output logic                     frozen,
  output logic [$clog2(DEPTH)-1:0] start_addr,
  output logic [15:0]              trig_count
);
  localparam int AW = $clog2(DEPTH);
  localparam int FW = $clog2(DELAY + 1);

  typedef enum logic [1:0] {ARMED, PENDING, FROZEN} cap_state_t;
  cap_state_t state;

  logic [AW-1:0] wptr;
  logic [FW-1:0] fill;
  logic          accept, dly_out, we;

  assign we     = (state != FROZEN);
  assign accept = trig && (state == ARMED) && (fill == FW'(DELAY));
  assign frozen = (state == FROZEN);

  trig_delay #(.DEPTH(DELAY), .W(1)) u_delay (.clk, .rst_n, .din(accept), .dout(dly_out));

  event_dpram #(.DEPTH(DEPTH), .W(W)) u_ram (
    .clk, .we, .waddr(wptr), .wdata(din), .raddr, .rdata
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= ARMED;
      wptr       <= '0;
      fill       <= '0;
      start_addr <= '0;
      trig_count <= '0;
    end else begin
      if (we) wptr <= wptr + 1'b1;
      if (we && fill != FW'(DELAY)) fill <= fill + 1'b1;
      unique case (state)
        ARMED:   if (accept) begin
                   state      <= PENDING;
                   trig_count <= trig_count + 1'b1;
                 end
        PENDING: if (dly_out) begin
                   state      <= FROZEN;
                   start_addr <= wptr + 1'b1;
                 end
        FROZEN:  if (arm) begin
                   state <= ARMED;
                   fill  <= '0;
                 end
        default: state <= ARMED;
      endcase
    end
  end

  // Only one trigger is ever in the delay line: it must find us in PENDING.
  a_one_in_flight: assert property (@(posedge clk) disable iff (!rst_n) dly_out |-> state == PENDING);
endmodule
