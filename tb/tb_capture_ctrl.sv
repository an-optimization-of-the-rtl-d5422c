// Self-checking testbench of capture_ctrl (DEPTH = 1024, DELAY = 512, 16-bit
// words). The profile word is a running counter, so every frozen word tells
// when it was written. Checks:
//  - a trigger before DELAY words have been written after arming is ignored;
//  - an accepted trigger freezes the RAM exactly DELAY + 1 cycles later;
//  - a second trigger while one is pending, and triggers while frozen, are
//    ignored (trig_count);
//  - the 1024 words read from start_addr on are consecutive, and the word
//    written with the trigger sits at offset DEPTH - DELAY - 2;
//  - after 'arm' the whole sequence works again.
`timescale 1ns/1ps
module tb_capture_ctrl;
  localparam int W = 16, DEPTH = 1024, DELAY = 512;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] din;
  logic trig, arm;
  logic [9:0] raddr, start_addr;
  logic [W-1:0] rdata;
  logic frozen;
  logic [15:0] trig_count;
  int checks = 0, failures = 0;
  int cnt = 0;

  capture_ctrl #(.W(W), .DEPTH(DEPTH), .DELAY(DELAY)) dut (
    .clk, .rst_n, .din, .trig, .arm, .raddr, .rdata, .frozen, .start_addr, .trig_count);
  always #2.5 clk = ~clk;

  task automatic tick(); @(negedge clk); cnt++; din = W'(cnt); endtask

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic capture(input int expect_count);
    int tword, wait_cyc;
    trig = 1; tword = cnt;
    tick(); trig = 0;
    // second trigger while pending
    repeat (50) tick();
    trig = 1; tick(); trig = 0;
    wait_cyc = 51 + 1;
    while (!frozen && wait_cyc < 2000) begin tick(); wait_cyc++; end
    // wait_cyc counts clock edges from the accepting edge itself
    check(wait_cyc == DELAY + 2, $sformatf("freeze after %0d edges, expected %0d", wait_cyc, DELAY + 2));
    check(trig_count == 16'(expect_count), $sformatf("trig_count %0d", trig_count));
    // triggers while frozen are ignored
    trig = 1; repeat (5) tick(); trig = 0;
    // read the profile
    for (int j = 0; j < DEPTH; j++) begin
      raddr = 10'(int'(start_addr) + j);
      tick();
      checks++;
      if (int'(rdata) != ((tword - (DEPTH - DELAY - 2) + j) & 16'hffff)) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d = %0d, expected %0d", j, rdata, (tword - (DEPTH - DELAY - 2) + j) & 16'hffff);
      end
    end
    check(frozen == 1'b1, "still frozen while reading");
    check(trig_count == 16'(expect_count), "no trigger accepted while frozen");
  endtask

  initial begin
    din = '0; trig = 0; arm = 0; raddr = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // early trigger: buffer not yet filled
    repeat (100) tick();
    trig = 1; tick(); trig = 0;
    repeat (700) tick();
    check(!frozen && trig_count == 0, "early trigger ignored");
    capture(1);
    // rearm, immediate trigger ignored, later trigger accepted
    arm = 1; tick(); arm = 0;
    check(!frozen, "rearmed");
    trig = 1; tick(); trig = 0;
    repeat (600) tick();
    check(!frozen && trig_count == 1, "trigger right after arm ignored");
    capture(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
