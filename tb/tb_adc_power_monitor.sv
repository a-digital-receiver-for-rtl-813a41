// Testbench for the ADC power monitor: random samples with occasional loud
// windows; the one-second power and the count of windows above threshold are
// modelled here and compared at each synchronising pulse.
module tb_adc_power_monitor;
  import mwa_pkg::*;
  localparam int WIN = 8, SEC = 200;
  logic clk = 0, rst = 1, sync = 0;
  pfbin_t din [SPC];
  logic [31:0] threshold = 32'd3000;
  logic [47:0] power_sec; logic [31:0] rfi_count; logic rfi_flag;
  int checks = 0, failures = 0;
  adc_power_monitor #(.WIN_CLKS(WIN)) dut (.*);
  always #5 clk = ~clk;
  longint acc; int wacc, ev, wc;
  initial begin
    for (int i = 0; i < SPC; i++) din[i] = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int s = 0; s < 4; s++) begin
      sync <= 1; acc = 0; wacc = 0; ev = 0; wc = 0;
      for (int k = 0; k < SEC; k++) begin
        automatic int amp = ((k / WIN) % 5 == 2) ? 255 : 15;
        automatic int sq = 0;
        for (int i = 0; i < SPC; i++) begin
          automatic int v = int'($urandom_range(2*amp)) - amp;
          din[i] <= pfbin_t'(v);
          sq += v * v;
        end
        acc += sq; wacc += sq; wc++;
        if (wc == WIN) begin if (longint'(wacc) > longint'(threshold)) ev++; wacc = 0; wc = 0; end
        @(posedge clk); sync <= 0;
      end
      sync <= 1; @(posedge clk); sync <= 0; #1;
      checks += 3;
      if (power_sec != 48'(acc)) begin failures++; $display("pow %0d %0d", power_sec, acc); end
      if (rfi_count != 32'(ev)) begin failures++; $display("ev %0d %0d", rfi_count, ev); end
      if (rfi_flag != (ev != 0)) failures++;
      if (s == 1) threshold <= 32'hFFFF_FFFF;
      if (s == 2) begin checks++; if (rfi_count != 0 || rfi_flag) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
