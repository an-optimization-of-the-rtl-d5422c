// Self-checking testbench of event_dpram (1024 x 40 bits): fills the RAM
// with random words, reads every address back (1 cycle latency), then checks
// that writes with we = 0 are ignored and that a same-address read returns
// the old word.
`timescale 1ns/1ps
module tb_event_dpram;
  localparam int DEPTH = 1024, W = 40;
  logic clk = 0;
  logic we;
  logic [9:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  event_dpram #(.DEPTH(DEPTH), .W(W)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #2.5 clk = ~clk;
  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 10'(a); wdata = W'({$urandom, $urandom}); model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = 10'(a);
      @(negedge clk);
      checks++;
      if (rdata != model[a]) begin failures++; if (failures < 10) $display("FAIL a=%0d", a); end
    end
    // writes with we = 0 are ignored
    for (int i = 0; i < 50; i++) begin
      we = 0; waddr = 10'($urandom); wdata = W'({$urandom, $urandom});
      @(negedge clk);
    end
    // same-address read during write returns the old word
    we = 1; waddr = 10'd77; raddr = 10'd77; wdata = ~model[77];
    @(negedge clk);
    checks++; if (rdata != model[77]) begin failures++; $display("FAIL read-during-write"); end
    model[77] = ~model[77];
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      raddr = 10'(a);
      @(negedge clk);
      checks++;
      if (rdata != model[a]) begin failures++; if (failures < 10) $display("FAIL 2nd a=%0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #60000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
