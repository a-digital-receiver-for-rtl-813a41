// Testbench for the spectrum integrator: feeds several frames of random
// spectra between synchronising pulses, then reads every channel's integrated
// power and threshold-event count and compares them with sums kept here.
module tb_spectrum_integrator;
  import mwa_pkg::*;
  logic clk = 0, rst = 1, sync = 0, in_valid = 0;
  logic [31:0] threshold = 32'd100_000_000;
  logic [6:0] in_slot = 0; cplx16_t in1, in2;
  chan_t rd_chan = 0; logic [55:0] rd_power; logic [31:0] rd_events;
  int checks = 0, failures = 0;
  spectrum_integrator dut (.*);
  always #5 clk = ~clk;
  longint acc [NUM_CH]; int ev [NUM_CH];
  function automatic longint pw(input int a, input int b); return longint'(a)*a + longint'(b)*b; endfunction
  initial begin
    in1 = '0; in2 = '0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int s = 0; s < 2; s++) begin
      sync <= 1; @(posedge clk); sync <= 0;
      for (int c = 0; c < NUM_CH; c++) begin acc[c] = 0; ev[c] = 0; end
      for (int f = 0; f < 5; f++)
        for (int k = 0; k < 128; k++) begin
          automatic int c2 = (k == 0) ? 128 : 256 - k;
          automatic int sc = (k % 16 == 3) ? 1 : 8;
          automatic int a = int'($signed(16'($urandom))) / sc, b = int'($signed(16'($urandom))) / sc;
          automatic int e = int'($signed(16'($urandom))) / sc, d = int'($signed(16'($urandom))) / sc;
          in_valid <= 1; in_slot <= 7'(k);
          in1.re <= 16'(a); in1.im <= 16'(b); in2.re <= 16'(e); in2.im <= 16'(d);
          acc[k] += pw(a, b); acc[c2] += pw(e, d);
          if (pw(a, b) > 100_000_000) ev[k]++;
          if (pw(e, d) > 100_000_000) ev[c2]++;
          @(posedge clk);
        end
      in_valid <= 0;
      sync <= 1; @(posedge clk); sync <= 0;
      for (int c = 0; c < NUM_CH; c++) begin
        rd_chan <= chan_t'(c); @(posedge clk); @(posedge clk); #1;
        checks += 2;
        if (rd_power != 56'(acc[c])) begin failures++; if (failures < 5) $display("ch %0d pow %0d %0d", c, rd_power, acc[c]); end
        if (rd_events != 32'(ev[c])) begin failures++; if (failures < 5) $display("ch %0d ev %0d %0d", c, rd_events, ev[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
