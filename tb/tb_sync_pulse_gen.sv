// Testbench for the synchronising-pulse generator: the first pulse follows
// the GPS tick, later pulses come every CLKS_PER_SEC clocks while further GPS
// ticks are ignored, and re-arming re-aligns to the next tick.
module tb_sync_pulse_gen;
  localparam int CPS = 50;
  logic clk = 0, rst = 1, gps_tick = 0, rearm = 0, sync, locked;
  int checks = 0, failures = 0, cyc = 0, last = -1, npulse = 0;
  sync_pulse_gen #(.CLKS_PER_SEC(CPS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  int expect_at = -1;
  always @(posedge clk) if (!rst) begin
    checks++;
    if (sync !== (cyc == expect_at)) begin failures++; $display("cyc %0d sync %0d exp %0d", cyc, sync, expect_at); end
    if (sync) begin npulse++; expect_at = cyc + CPS; end
  end
  task automatic tick();
    gps_tick <= 1; @(posedge clk); gps_tick <= 0;
  endtask
  initial begin
    repeat (3) @(posedge clk); rst <= 0;
    repeat (7) @(posedge clk);
    checks++; if (locked) failures++;
    tick(); expect_at = cyc + 1;
    repeat (20) @(posedge clk);
    tick();                                  // ignored once locked
    repeat (150) @(posedge clk);
    rearm <= 1; @(posedge clk); rearm <= 0; expect_at = -1;
    repeat (13) @(posedge clk);
    tick(); expect_at = cyc + 1;
    repeat (120) @(posedge clk);
    checks++; if (npulse != 7) begin failures++; $display("pulses %0d", npulse); end
    checks++; if (!locked) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
