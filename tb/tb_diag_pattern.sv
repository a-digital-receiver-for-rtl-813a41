// Testbench for the diagnostic pattern generator: ramp by STEP, restart on sync.
module tb_diag_pattern;
  logic clk = 0, rst = 1, sync = 0;
  logic [11:0] pattern;
  int checks = 0, failures = 0;
  diag_pattern #(.W(12), .STEP(3)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    automatic int e = 3;
    repeat (3) @(posedge clk); rst <= 0;
    @(posedge clk); #1; checks++; if (pattern != 3) failures++;
    for (int k = 0; k < 3000; k++) begin
      if (k == 1500) sync <= 1; else sync <= 0;
      @(posedge clk); #1;
      e = (k == 1500) ? 0 : (e + 3) % 4096;
      checks++; if (int'(pattern) != e) begin failures++; if (failures < 4) $display("k %0d got %0d exp %0d", k, pattern, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
