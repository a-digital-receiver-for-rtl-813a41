// Testbench for the Walsh demodulator: checks the sign of every output sample
// against Hadamard row PIPE_ID, the state length, the restart on sync, the
// 9-bit negation of -128 and the pass-through when disabled.
module tb_walsh_demod;
  import mwa_pkg::*;
  localparam int SC = 5, PID = 11;
  logic clk = 0, rst = 1, sync = 0, enable = 1;
  adc_t din [SPC];
  pfbin_t dout [SPC];
  logic walsh_neg; logic [3:0] walsh_state;
  int checks = 0, failures = 0;
  walsh_demod #(.PIPE_ID(PID), .STATE_CLKS(SC)) dut (.*);
  always #5 clk = ~clk;
  adc_t prev [SPC];
  int   t = -1;          // clocks since sync (input side)
  logic pen;
  initial begin
    for (int i = 0; i < SPC; i++) din[i] = 0;
    repeat (3) @(posedge clk); rst <= 0; sync <= 1; @(posedge clk); sync <= 0; t = 0;
    repeat (200) begin
      for (int i = 0; i < SPC; i++) din[i] <= (t % 7 == 0 && i == 0) ? adc_t'(-128) : adc_t'($urandom);
      pen = enable;
      @(posedge clk);
      #1;
      begin
        automatic int st = (t / SC) % 16;
        automatic logic neg = pen && ^(4'(PID) & 4'(st));
        for (int i = 0; i < SPC; i++) begin
          automatic int d = int'(din[i]);
          checks++;
          if (int'(dout[i]) != (neg ? -d : d)) begin failures++; $display("t %0d i %0d %0d %0d", t, i, dout[i], d); end
        end
      end
      t++;
      if (t == 150) enable <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
